// tb_qbsa_alu16: the block-skewed ALU built with four blocks (16 bits).
//
// Checks that the block count is a true parameter: with N_BLOCKS = 4 the
// full-word latency must be 7 + 4 = 11 cycles while the dependent interval
// stays 8. A random stream of operations (with idle cycles, feedback and
// long carry chains) is compared with the bit-serial reference at 16 bits;
// each block's skewed output is checked at t0+8+k and the aligned word at
// t0+11.
module tb_qbsa_alu16;
  import qbsa_pkg::*;
  import qbsa_ref_pkg::*;

  localparam int NB = 4;
  localparam int W  = 4 * NB;
  localparam int L  = 7 + NB;
  localparam int N  = 4000;
  localparam int HN = N + 50;

  logic clk = 1'b0, rst_n;
  always #5 clk = ~clk;

  logic          in_valid, fb;
  logic [W-1:0]  a, b, s_skewed, s;
  alu_ctrl_t     ctrl;
  logic [NB-1:0] blk_valid;
  logic          out_valid, cout, cout_early;

  qbsa_alu32 #(.N_BLOCKS(NB)) dut (.clk, .rst_n, .in_valid, .a, .b, .ctrl, .fb,
                                   .s_skewed, .blk_valid, .s, .out_valid, .cout, .cout_early);

  int checks = 0, failures = 0, n_fb = 0;
  int cyc = 0;
  logic         h_v [HN];
  logic [W:0]   h_r [HN];

  always @(posedge clk) if (rst_n) cyc <= cyc + 1;

  task automatic chk(logic [W-1:0] got, logic [W-1:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("cyc %0d %s got %h exp %h", cyc, what, got, exp);
    end
  endtask

  always @(negedge clk) if (rst_n) begin
    for (int k = 0; k < NB; k++) begin
      automatic int t = cyc - 8 - k;
      if (t >= 0 && t < HN) begin
        chk(W'(blk_valid[k]), W'(h_v[t]), "blk_valid");
        if (h_v[t]) chk(W'(s_skewed[4*k +: 4]), W'(h_r[t][4*k +: 4]), "s_skewed");
      end
    end
    if (cyc - L >= 0 && cyc - L < HN) begin
      chk(W'(out_valid), W'(h_v[cyc-L]), "out_valid");
      if (h_v[cyc-L]) begin
        chk(s, h_r[cyc-L][W-1:0], "s");
        chk(W'(cout), W'(h_r[cyc-L][W]), "cout");
        chk(W'(cout_early), W'(h_r[cyc-L][W]), "cout_early");
      end
    end
  end

  initial begin
    rst_n = 1'b0; in_valid = 0; fb = 0; a = 0; b = 0; ctrl = '0;
    for (int i = 0; i < HN; i++) h_v[i] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < N; i++) begin
      automatic alu_op_t op = alu_op_t'($urandom % 8);
      automatic logic [W-1:0] x = W'($urandom), y = W'($urandom), beff;
      automatic logic v = ($urandom % 5) != 0;
      automatic logic f = v && cyc >= 8 && h_v[cyc-8] && ($urandom % 3 == 0);
      automatic logic [32:0] r;
      if ($urandom % 4 == 0) y = ctrl_of(op).cmpl_b ? x : ~x;
      beff = f ? h_r[cyc-8][W-1:0] : y;
      in_valid = v; ctrl = ctrl_of(op); a = x; b = y; fb = f;
      r = apply(ctrl, 32'(x), 32'(beff), ctrl.cin, W);
      h_v[cyc] = v;
      h_r[cyc] = {r[32], r[W-1:0]};
      if (v && f) n_fb++;
      @(negedge clk);
    end
    in_valid = 0; fb = 0;
    repeat (L + 5) @(negedge clk);
    checks++;
    if (n_fb == 0) begin failures++; $display("feedback never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (HN + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
