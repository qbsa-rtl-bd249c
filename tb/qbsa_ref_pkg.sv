// qbsa_ref_pkg: reference model shared by the ALU testbenches.
//
// apply() evaluates one operation on WIDTH-bit operands the slow way, one
// bit after another with a rippling carry, straight from the meaning of the
// control signals: operands optionally complemented, result bit =
// (Op_AND & a&b | Op_XOR & a^b) ^ carry, carry generated only when
// Op_ARITH is set and propagated by a^b. It returns {carry_out, result}.
// ctrl_of() gives the control word of each operation of the table.
package qbsa_ref_pkg;
  import qbsa_pkg::*;

  function automatic logic [32:0] apply(alu_ctrl_t c, logic [31:0] x, logic [31:0] y,
                                        logic cin, int width = 32);
    logic [31:0] r = '0;
    logic cy = cin;
    for (int i = 0; i < width; i++) begin
      logic xa = x[i] ^ c.cmpl_a;
      logic yb = y[i] ^ c.cmpl_b;
      r[i] = ((c.op_and & xa & yb) | (c.op_xor & (xa ^ yb))) ^ cy;
      cy = (xa & yb & c.op_arith) | ((xa ^ yb) & cy);
    end
    return {cy, r};
  endfunction

  function automatic alu_ctrl_t ctrl_of(alu_op_t op);
    case (op)
      OP_ADD:  return '{1,0,1,0,0,0};
      OP_SUB:  return '{1,0,1,0,1,1};
      OP_SLT:  return '{1,0,1,0,1,1};
      OP_EQ:   return '{0,0,1,0,1,1};
      OP_AND:  return '{0,1,0,0,0,0};
      OP_OR:   return '{0,1,1,0,0,0};
      OP_XOR:  return '{0,0,1,0,0,0};
      default: return '{0,1,0,1,1,0};
    endcase
  endfunction

endpackage
