// qbsa_op_decode: operation-to-control decoder of the block-skewed ALU.
//
// Purely combinational. Turns one of the eight supported operations into the
// six control signals the ALU blocks consume. The values are those of the
// published operation table: arithmetic operations set Op_ARITH so that bit
// generates start carries, logic operations select the AND and/or XOR of the
// (optionally complemented) operands, SUB/SLT/EQ invert B and add a carry-in
// of one, NOR inverts both operands and takes their AND.
// SLT shares SUB's controls and EQ is an XNOR whose carry-in ripples through
// only when every bit matches; turning those into a 1-bit flag is left to
// the consumer of the result.
module qbsa_op_decode
  import qbsa_pkg::*;
(
  input  alu_op_t   op,
  output alu_ctrl_t ctrl
);

  always_comb begin
    unique case (op)
      //                    arith and   xor   cmpa  cmpb  cin
      OP_ADD:  ctrl = '{1'b1, 1'b0, 1'b1, 1'b0, 1'b0, 1'b0};
      OP_SUB:  ctrl = '{1'b1, 1'b0, 1'b1, 1'b0, 1'b1, 1'b1};
      OP_SLT:  ctrl = '{1'b1, 1'b0, 1'b1, 1'b0, 1'b1, 1'b1};
      OP_EQ:   ctrl = '{1'b0, 1'b0, 1'b1, 1'b0, 1'b1, 1'b1};
      OP_AND:  ctrl = '{1'b0, 1'b1, 1'b0, 1'b0, 1'b0, 1'b0};
      OP_OR:   ctrl = '{1'b0, 1'b1, 1'b1, 1'b0, 1'b0, 1'b0};
      OP_XOR:  ctrl = '{1'b0, 1'b0, 1'b1, 1'b0, 1'b0, 1'b0};
      OP_NOR:  ctrl = '{1'b0, 1'b1, 1'b0, 1'b1, 1'b1, 1'b0};
      default: ctrl = '0;
    endcase
  end

endmodule
