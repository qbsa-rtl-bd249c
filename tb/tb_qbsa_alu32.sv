// tb_qbsa_alu32: self-checking testbench of the 32-bit block-skewed ALU.
//
// Phase 1, random stream: every cycle a random operation of the table with
// random operands is issued (sometimes none). Some operations use feedback,
// legal when an operation was issued exactly 8 cycles earlier; their B is
// that operation's 32-bit result. Operands are biased towards long carry
// chains (B = ~A plus carry, A = B for EQ) so carries cross all eight
// blocks. A bit-serial reference predicts every result. The checker tests
// each block's skewed output at t0+8+k, the aligned result, C_out and
// C_out_early at t0+15, and all valid bits, so latency and skew are checked
// cycle by cycle.
// Phase 2, dependent chain: operations each using the previous result, at
// the initiation interval of 8, plus the first case of the published
// waveform (0000000f + 00000002 = 00000011 after 15 cycles). The chain's
// last result must arrive 8*(n-1)+15 cycles after the first issue.
// Phase 3, back-to-back independent operations (interval 1): a burst of 32
// must produce 32 results on consecutive cycles.
module tb_qbsa_alu32;
  import qbsa_pkg::*;
  import qbsa_ref_pkg::*;

  localparam int N = 5000;
  localparam int L = ALU_LATENCY;   // 15
  localparam int HN = N + 400;

  logic clk = 1'b0, rst_n;
  always #5 clk = ~clk;

  logic        in_valid, fb;
  logic [31:0] a, b;
  alu_ctrl_t   ctrl;
  logic [31:0] s_skewed, s;
  logic [7:0]  blk_valid;
  logic        out_valid, cout, cout_early;

  qbsa_alu32 dut (.clk, .rst_n, .in_valid, .a, .b, .ctrl, .fb,
                  .s_skewed, .blk_valid, .s, .out_valid, .cout, .cout_early);

  int checks = 0, failures = 0;
  int n_fb = 0, n_carry_all = 0, n_results = 0;
  int cyc = 0;
  logic        h_v [HN];
  logic [32:0] h_r [HN];
  logic [31:0] got_s [HN];     // aligned output seen L cycles after issue t
  int          out_cyc [HN];   // cycle at which that output was seen

  always @(posedge clk) if (rst_n) cyc <= cyc + 1;

  task automatic chk(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("cyc %0d %s got %h exp %h", cyc, what, got, exp);
    end
  endtask

  always @(negedge clk) if (rst_n) begin
    for (int k = 0; k < 8; k++) begin
      automatic int t = cyc - 8 - k;
      if (t >= 0 && t < HN) begin
        chk(32'(blk_valid[k]), 32'(h_v[t]), $sformatf("blk_valid[%0d]", k));
        if (h_v[t]) chk(32'(s_skewed[4*k +: 4]), 32'(h_r[t][4*k +: 4]), $sformatf("s_skewed[%0d]", k));
      end
    end
    if (cyc - L >= 0 && cyc - L < HN) begin
      chk(32'(out_valid), 32'(h_v[cyc-L]), "out_valid");
      if (h_v[cyc-L]) begin
        n_results++;
        got_s[cyc-L] = s;
        out_cyc[cyc-L] = cyc;
        chk(s, h_r[cyc-L][31:0], "s");
        chk(32'(cout), 32'(h_r[cyc-L][32]), "cout");
        chk(32'(cout_early), 32'(h_r[cyc-L][32]), "cout_early");
      end
    end
  end

  // issue one operation in the current cycle (called just after a negedge)
  task automatic issue(logic v, alu_ctrl_t c, logic [31:0] x, logic [31:0] y, logic f);
    logic [31:0] beff;
    in_valid = v; ctrl = c; a = x; b = y; fb = f;
    beff = f ? h_r[cyc-8][31:0] : y;
    h_v[cyc] = v;
    h_r[cyc] = apply(c, x, beff, c.cin);
    if (v && f) n_fb++;
    // a carry that passes through all eight blocks: every bit propagates
    if (v && c.op_arith && ((x ^ {32{c.cmpl_a}}) ^ (beff ^ {32{c.cmpl_b}})) == 32'hFFFF_FFFF && c.cin)
      n_carry_all++;
    @(negedge clk);
  endtask

  int t_first, t_last;
  logic [31:0] acc;

  initial begin
    rst_n = 1'b0; in_valid = 0; fb = 0; a = 0; b = 0; ctrl = '0;
    for (int i = 0; i < HN; i++) begin h_v[i] = 0; out_cyc[i] = -1; got_s[i] = '0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // ---- phase 1: random stream ----
    for (int i = 0; i < N; i++) begin
      automatic alu_op_t op = alu_op_t'($urandom % 8);
      automatic logic [31:0] x = $urandom, y = $urandom;
      automatic logic v = ($urandom % 6) != 0;
      automatic logic f = v && cyc >= 8 && h_v[cyc-8] && ($urandom % 3 == 0);
      case ($urandom % 4)
        0: y = ctrl_of(op).cmpl_b ? x : ~x;   // all bits propagate
        1: y = (op == OP_EQ) ? x : y;
        default: ;
      endcase
      issue(v, ctrl_of(op), x, y, f);
    end
    issue(0, '0, 0, 0, 0);
    repeat (20) issue(0, '0, 0, 0, 0);

    // ---- phase 2: dependent chain at II = 8 ----
    // first operation is the published waveform's: 0000000f + 00000002
    t_first = cyc;
    issue(1, ctrl_of(OP_ADD), 32'h0000_000f, 32'h0000_0002, 0);
    repeat (7) issue(0, '0, 0, 0, 0);
    // then acc <- A + acc with A = 0x0fff_ffff repeatedly, carries everywhere
    for (int i = 0; i < 30; i++) begin
      issue(1, ctrl_of(i % 4 == 3 ? OP_SUB : OP_ADD), 32'h0fff_ffff, 32'hdead_beef, 1);
      repeat (7) issue(0, '0, 0, 0, 0);
    end
    t_last = cyc - 8;
    repeat (L + 2) issue(0, '0, 0, 0, 0);
    // the result of the first operation appears 15 cycles after issue
    chk(got_s[t_first], 32'h0000_0011, "waveform example");
    chk(32'(out_cyc[t_first] - t_first), 32'(L), "latency");
    // independent expected chain value
    acc = 32'h11;
    for (int i = 0; i < 30; i++) acc = (i % 4 == 3) ? 32'h0fff_ffff - acc : 32'h0fff_ffff + acc;
    chk(got_s[t_last], acc, "dependent chain result");
    chk(32'(out_cyc[t_last] - t_first), 32'(8 * 30 + L), "dependent chain cycles");

    // ---- phase 3: 32 independent operations back to back ----
    begin
      automatic int t_burst = cyc;
      automatic int consec = 0;
      for (int i = 0; i < 32; i++) issue(1, ctrl_of(OP_ADD), 32'(i), 32'(i * 3), 0);
      repeat (L + 2) issue(0, '0, 0, 0, 0);
      for (int i = 0; i < 32; i++)
        if (out_cyc[t_burst + i] == t_burst + i + L && got_s[t_burst + i] == 32'(4 * i)) consec++;
      chk(32'(consec), 32'd32, "back-to-back results");
    end

    checks++;
    if (n_fb < 100 || n_carry_all < 50) begin
      failures++;
      $display("mechanism not exercised: feedback %0d, full carry %0d", n_fb, n_carry_all);
    end
    $display("feedback ops %0d, full-width carry ops %0d, results %0d", n_fb, n_carry_all, n_results);
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
