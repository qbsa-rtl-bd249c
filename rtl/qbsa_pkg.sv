// qbsa_pkg: types and constants shared by the block-skewed ALU.
//
// The ALU is a 32-bit datapath cut into eight 4-bit blocks. Every block is
// a seven-stage pipelined Sklansky adder/logic unit; block k starts k+1
// clock cycles after the operands are issued, so its result appears at
// t0+8+k and the full word at t0+15. The constants below hold those numbers.
// alu_ctrl_t carries the six control signals of the operation table
// (Op_ARITH, Op_AND, Op_XOR, Cmpl_a, Cmpl_b, C_in); alu_op_t names the eight
// supported operations. The numeric encoding of alu_op_t is this design's
// own choice; the control values per operation follow the published table.
package qbsa_pkg;

  localparam int unsigned BLOCK_W   = 4;  // bits per block
  localparam int unsigned NUM_BLOCKS = 8; // blocks in the 32-bit ALU
  localparam int unsigned CIN_STAGE = 5;  // core stage at which the carry-in is consumed
  localparam int unsigned CORE_DEPTH = 7; // pipeline depth of a 4-bit core
  localparam int unsigned BLOCK_LATENCY = CORE_DEPTH + 1; // core plus input/MUX stage
  localparam int unsigned ALU_LATENCY = BLOCK_LATENCY + NUM_BLOCKS - 1; // 15

  typedef struct packed {
    logic op_arith;  // let generates start carries
    logic op_and;    // pass a'&b' to the result
    logic op_xor;    // pass a'^b' to the result
    logic cmpl_a;    // invert operand A
    logic cmpl_b;    // invert operand B
    logic cin;       // carry into bit 0
  } alu_ctrl_t;

  typedef enum logic [2:0] {
    OP_ADD = 3'd0,
    OP_SUB = 3'd1,
    OP_SLT = 3'd2,
    OP_EQ  = 3'd3,
    OP_AND = 3'd4,
    OP_OR  = 3'd5,
    OP_XOR = 3'd6,
    OP_NOR = 3'd7
  } alu_op_t;

endpackage
