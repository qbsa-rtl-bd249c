// tb_qbsa_op_decode: checks the operation decoder against the operation
// table, row by row, and checks that each decoded control word gives the
// expected result on a few operand pairs when applied bit by bit.
module tb_qbsa_op_decode;
  import qbsa_pkg::*;

  alu_op_t   op;
  alu_ctrl_t ctrl;
  int checks = 0, failures = 0;

  qbsa_op_decode dut (.op, .ctrl);

  // table rows: {Op_ARITH, Op_AND, Op_XOR, Cmpl_a, Cmpl_b, C_in}
  logic [5:0] table_row [8] = '{6'b101000, 6'b101011, 6'b101011, 6'b001011,
                                6'b010000, 6'b011000, 6'b001000, 6'b010110};

  function automatic logic [31:0] apply(alu_ctrl_t c, logic [31:0] x, logic [31:0] y);
    logic [31:0] r;
    logic cy = c.cin;
    for (int i = 0; i < 32; i++) begin
      logic xa = x[i] ^ c.cmpl_a, yb = y[i] ^ c.cmpl_b;
      r[i] = ((c.op_and & xa & yb) | (c.op_xor & (xa ^ yb))) ^ cy;
      cy = (xa & yb & c.op_arith) | ((xa ^ yb) & cy);
    end
    return r;
  endfunction

  initial begin
    for (int i = 0; i < 8; i++) begin
      op = alu_op_t'(i);
      #1;
      checks++;
      if (ctrl !== table_row[i]) begin
        failures++;
        $display("op %s: ctrl %b expected %b", op.name(), ctrl, table_row[i]);
      end
      for (int n = 0; n < 50; n++) begin
        automatic logic [31:0] x = $urandom;
        automatic logic [31:0] y = (n % 5 == 0) ? x : $urandom;
        automatic logic [31:0] want;
        case (op)
          OP_ADD:          want = x + y;
          OP_SUB, OP_SLT:  want = x - y;
          OP_EQ:           want = (x == y) ? 32'h0 : apply(ctrl, x, y);
          OP_AND:          want = x & y;
          OP_OR:           want = x | y;
          OP_XOR:          want = x ^ y;
          default:         want = ~(x | y);
        endcase
        checks++;
        if (apply(ctrl, x, y) !== want) begin
          failures++;
          $display("op %s: %h,%h gives %h expected %h", op.name(), x, y, apply(ctrl, x, y), want);
        end
        if (op == OP_EQ) begin
          checks++;
          if ((apply(ctrl, x, y) == 0) != (x == y)) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
