// qbsa_top: block-skewed 32-bit ALU with an operation-code input.
//
// The operation (ADD, SUB, SLT, EQ, AND, OR, XOR, NOR) is decoded into the
// six control signals of the operation table in the issue cycle and handed,
// with the operands and the feedback select, to the 32-bit block-skewed
// ALU. Timing is that of qbsa_alu32: issue at t0, slice k result at
// t0+8+k, whole word, C_out and C_out_early at t0+15; one operation per
// cycle, a dependent one (fb=1) exactly 8 cycles after its producer.
// Placing the table decoder in front of the ALU is this design's own choice;
// the published simulation drives the control signals directly.
module qbsa_top
  import qbsa_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  alu_op_t     op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic        fb,
  output logic [31:0] s_skewed,
  output logic [7:0]  blk_valid,
  output logic [31:0] s,
  output logic        out_valid,
  output logic        cout,
  output logic        cout_early
);

  alu_ctrl_t ctrl;

  qbsa_op_decode u_dec (.op, .ctrl);

  qbsa_alu32 u_alu (
    .clk, .rst_n, .in_valid, .a, .b, .ctrl, .fb,
    .s_skewed, .blk_valid, .s, .out_valid, .cout, .cout_early
  );

endmodule
