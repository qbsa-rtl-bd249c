// tb_qbsa_slice: self-checking testbench of one skewed slice.
//
// Two slices are tested side by side: slice 0 (first block, carry with the
// operands) and slice 3 (three extra input stages, carry from outside).
// Each cycle a random operation is issued, sometimes none, sometimes one
// that uses feedback (fb) in place of B, which is only legal when an
// operation was issued exactly 8 cycles before. Slice 3's carry-in is a
// random bit driven at t0+3+6, when the slice needs it. The checker expects
// cout_early at t0+7+K, s, cout and out_valid at t0+8+K, with the value
// from the bit-serial reference model; with feedback the reference uses the
// slice's own result of 8 cycles earlier as B.
module tb_qbsa_slice;
  import qbsa_pkg::*;
  import qbsa_ref_pkg::*;

  localparam int N = 4000;
  localparam int K1 = 3;

  logic clk = 1'b0, rst_n;
  always #5 clk = ~clk;

  logic       in_valid, fb;
  logic [3:0] a, b;
  alu_ctrl_t  ctrl;
  logic       cin3;
  logic [3:0] s0, s3;
  logic ce0, ce3, co0, co3, v0, v3;

  qbsa_slice #(.K(0)) dut0 (.clk, .rst_n, .in_valid, .a, .b, .ctrl, .fb, .cin_late(1'b0),
                            .s(s0), .cout_early(ce0), .cout(co0), .out_valid(v0));
  qbsa_slice #(.K(K1)) dut3 (.clk, .rst_n, .in_valid, .a, .b, .ctrl, .fb, .cin_late(cin3),
                             .s(s3), .cout_early(ce3), .cout(co3), .out_valid(v3));

  int checks = 0, failures = 0, n_fb = 0;
  int cyc = 0;
  logic       h_v [N + 40];
  logic [4:0] h_r0 [N + 40], h_r3 [N + 40];
  logic       h_c3 [N + 40];

  always @(posedge clk) if (rst_n) cyc <= cyc + 1;
  always_comb cin3 = (cyc >= K1 + 6 && cyc - K1 - 6 < N) ? h_c3[cyc-K1-6] : 1'b0;

  // {carry_out, result} of a 4-bit operation
  function automatic logic [4:0] res4(alu_ctrl_t c, logic [3:0] x, logic [3:0] y, logic ci);
    logic [32:0] r = apply(c, 32'(x), 32'(y), ci, 4);
    return {r[32], r[3:0]};
  endfunction

  task automatic chk(logic got, logic exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("cyc %0d %s got %b exp %b", cyc, what, got, exp); end
  endtask

  always @(negedge clk) if (rst_n) begin
    if (cyc >= 8 && cyc - 8 < N) begin
      chk(v0, h_v[cyc-8], "v0");
      if (h_v[cyc-8]) begin
        checks++; if (s0 !== h_r0[cyc-8][3:0]) begin failures++; $display("cyc %0d s0 %h exp %h", cyc, s0, h_r0[cyc-8][3:0]); end
        chk(co0, h_r0[cyc-8][4], "co0");
      end
    end
    if (cyc >= 7 && cyc - 7 < N && h_v[cyc-7]) chk(ce0, h_r0[cyc-7][4], "ce0");
    if (cyc >= 8 + K1 && cyc - 8 - K1 < N) begin
      chk(v3, h_v[cyc-8-K1], "v3");
      if (h_v[cyc-8-K1]) begin
        checks++; if (s3 !== h_r3[cyc-8-K1][3:0]) begin failures++; $display("cyc %0d s3 %h exp %h", cyc, s3, h_r3[cyc-8-K1][3:0]); end
        chk(co3, h_r3[cyc-8-K1][4], "co3");
      end
    end
    if (cyc >= 7 + K1 && cyc - 7 - K1 < N && h_v[cyc-7-K1]) chk(ce3, h_r3[cyc-7-K1][4], "ce3");
  end

  initial begin
    rst_n = 1'b0; in_valid = 0; fb = 0; a = 0; b = 0; ctrl = '0;
    for (int i = 0; i < N + 40; i++) begin h_v[i] = 0; h_c3[i] = 0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < N; i++) begin
      logic [3:0] beff0, beff3;
      in_valid = ($urandom % 8) != 0;
      a = 4'($urandom); b = 4'($urandom);
      ctrl = ctrl_of(alu_op_t'($urandom % 8));
      fb = in_valid && i >= 8 && h_v[i-8] && ($urandom % 2);
      beff0 = fb ? h_r0[i-8][3:0] : b;
      beff3 = fb ? h_r3[i-8][3:0] : b;
      if (fb) n_fb++;
      h_c3[i] = 1'($urandom);
      h_v[i]  = in_valid;
      h_r0[i] = res4(ctrl, a, beff0, ctrl.cin);
      h_r3[i] = res4(ctrl, a, beff3, h_c3[i]);
      @(negedge clk);
    end
    in_valid = 0; fb = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (n_fb < 100) begin failures++; $display("too few feedback operations: %0d", n_fb); end
    $display("feedback operations: %0d", n_fb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (N + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
