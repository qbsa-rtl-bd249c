// qbsa_slice: one block-skewed 4-bit slice of the ALU (block K of 0..7).
//
// Operands and controls are issued to all slices in the same cycle t0.
// Slice K delays them by K+1 register stages before its 4-bit core, so
// block K starts one cycle after block K-1 and its carry-in arrives from
// block K-1 exactly when the core needs it (five stages after its operands).
// The last input stage holds the feedback multiplexer on the B side: when
// fb is set for an operation, the slice's own latest result replaces its
// 4 bits of B. Because slice K's result leaves at t0+8+K and the dependent
// operation's B bits reach the multiplexer at t1+K, an operation issued
// at t1 = t0+8 can use the result of the operation issued at t0, in every
// slice, without waiting for the whole 32-bit word (initiation interval 8).
// Timing: cout_early at t0+7+K, s, cout and out_valid at t0+8+K.
// The multiplexer takes whatever the core outputs in that cycle, so fb is
// only meaningful exactly 8 cycles after the producing operation; an
// assertion flags fb without a producer there.
// Following the published micro-architecture: the K+1 input FF stages, the
// MUX in front of B fed by the block's own output, and the first block's
// in-block carry DFFs. This design's own choices: the fb select travelling
// with the operation, controls skewed along with the data, and the valid bit.
module qbsa_slice
  import qbsa_pkg::*;
#(
  parameter int unsigned K = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [3:0]  a,
  input  logic [3:0]  b,
  input  alu_ctrl_t   ctrl,
  input  logic        fb,
  input  logic        cin_late,
  output logic [3:0]  s,
  output logic        cout_early,
  output logic        cout,
  output logic        out_valid
);

  localparam int unsigned PRE = K;  // plain DFF stages ahead of the MUX stage
  localparam int unsigned W   = 1 + 4 + 4 + $bits(alu_ctrl_t) + 1;

  // stages 1..K: plain DFFs
  logic [3:0] a_k, b_k;
  alu_ctrl_t  ctrl_k;
  logic       fb_k, v_k;

  if (PRE == 0) begin : g_noskew
    assign {v_k, a_k, b_k, ctrl_k, fb_k} = {in_valid, a, b, ctrl, fb};
  end else begin : g_skew
    dff_chain #(.WIDTH(W), .DEPTH(PRE)) u_skew (
      .clk, .rst_n,
      .d({in_valid, a,   b,   ctrl,   fb}),
      .q({v_k,      a_k, b_k, ctrl_k, fb_k})
    );
  end

  // stage K+1: DFFs on A/controls, feedback MUX on B
  logic [3:0] a_m, b_m;
  alu_ctrl_t  ctrl_m;
  logic       v_m;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      {a_m, b_m, ctrl_m, v_m} <= '0;
    end else begin
      a_m    <= a_k;
      b_m    <= fb_k ? s : b_k;
      ctrl_m <= ctrl_k;
      v_m    <= v_k;
    end
  end

  sklansky_alu4 #(.FIRST_BLOCK(K == 0)) u_core (
    .clk, .rst_n,
    .a(a_m), .b(b_m), .ctrl(ctrl_m), .cin_late,
    .s, .cout_early, .cout
  );

  dff_chain #(.WIDTH(1), .DEPTH(CORE_DEPTH)) u_vld (
    .clk, .rst_n, .d(v_m), .q(out_valid)
  );

  // Feedback rule: an operation that selects feedback must meet a real
  // result at the MUX, i.e. one issued exactly 8 cycles before it.
  a_fb_has_producer: assert property (
    @(posedge clk) disable iff (!rst_n) (v_k && fb_k) |-> out_valid
  ) else $error("qbsa_slice %0d: fb set with no operation issued 8 cycles earlier", K);

endmodule
