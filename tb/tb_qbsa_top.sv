// tb_qbsa_top: end-to-end testbench of the block-skewed ALU, at its
// published size (32 bits, eight 4-bit blocks, no parameter overrides).
//
// Drives the operation-code interface with a random stream of the eight
// operations, mixing idle cycles, back-to-back independent operations
// (interval 1) and dependent operations that take the result of the
// operation issued 8 cycles earlier through the feedback path (interval 8).
// Expected results come from ordinary integer arithmetic where the operation
// has one (ADD, SUB, SLT as a subtraction, AND, OR, XOR, NOR, EQ: zero result
// and carry-out exactly when the operands are equal) and from the bit-serial
// reference otherwise. Each block's skewed output is checked at t0+8+k, the
// aligned word and the carries at t0+15. The testbench counts how often each
// mechanism happened (feedback, back-to-back issue, a carry rippling through
// all eight blocks, carry-out, each operation, EQ true and false) and counts
// a failure for any that never happened.
module tb_qbsa_top;
  import qbsa_pkg::*;
  import qbsa_ref_pkg::*;

  localparam int N = 20000;
  localparam int L = ALU_LATENCY;
  localparam int HN = N + 100;

  logic clk = 1'b0, rst_n;
  always #5 clk = ~clk;

  logic        in_valid, fb;
  alu_op_t     op;
  logic [31:0] a, b;
  logic [31:0] s_skewed, s;
  logic [7:0]  blk_valid;
  logic        out_valid, cout, cout_early;

  qbsa_top dut (.clk, .rst_n, .in_valid, .op, .a, .b, .fb,
                .s_skewed, .blk_valid, .s, .out_valid, .cout, .cout_early);

  int checks = 0, failures = 0;
  int n_fb = 0, n_b2b = 0, n_carry_all = 0, n_cout = 0, n_eq_true = 0, n_eq_false = 0;
  int n_op [8];
  int cyc = 0;
  logic        h_v [HN];
  logic [32:0] h_r [HN];

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
        chk(32'(blk_valid[k]), 32'(h_v[t]), "blk_valid");
        if (h_v[t]) chk(32'(s_skewed[4*k +: 4]), 32'(h_r[t][4*k +: 4]), "s_skewed");
      end
    end
    if (cyc - L >= 0 && cyc - L < HN) begin
      chk(32'(out_valid), 32'(h_v[cyc-L]), "out_valid");
      if (h_v[cyc-L]) begin
        chk(s, h_r[cyc-L][31:0], "s");
        chk(32'(cout), 32'(h_r[cyc-L][32]), "cout");
        chk(32'(cout_early), 32'(h_r[cyc-L][32]), "cout_early");
      end
    end
  end

  // expected {carry, result} from integer arithmetic where it exists
  function automatic logic [32:0] expect_int(alu_op_t o, logic [31:0] x, logic [31:0] y);
    case (o)
      OP_ADD:         return 33'(x) + 33'(y);
      OP_SUB, OP_SLT: return {1'b0, x} + {1'b0, ~y} + 33'd1;
      OP_AND:         return {1'b0, x & y};
      OP_OR:          return {1'b0, x | y};
      OP_XOR:         return {1'b0, x ^ y};
      OP_NOR:         return {1'b0, ~(x | y)};
      default:        return (x == y) ? {1'b1, 32'h0} : apply(ctrl_of(OP_EQ), x, y, 1'b1);
    endcase
  endfunction

  initial begin
    rst_n = 1'b0; in_valid = 0; fb = 0; a = 0; b = 0; op = OP_ADD;
    for (int i = 0; i < HN; i++) h_v[i] = 0;
    for (int i = 0; i < 8; i++) n_op[i] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < N; i++) begin
      automatic alu_op_t o = alu_op_t'($urandom % 8);
      automatic logic [31:0] x = $urandom, y = $urandom, beff;
      automatic logic v = ($urandom % 5) != 0;
      automatic logic f = v && cyc >= 8 && h_v[cyc-8] && ($urandom % 3 == 0);
      case ($urandom % 4)
        0: y = ctrl_of(o).cmpl_b ? x : ~x;   // every bit propagates
        1: y = (o == OP_EQ) ? x : y;
        default: ;
      endcase
      beff = f ? h_r[cyc-8][31:0] : y;
      in_valid = v; op = o; a = x; b = y; fb = f;
      h_v[cyc] = v;
      h_r[cyc] = expect_int(o, x, beff);
      // cross-check the integer expectation against the bit-level model
      checks++;
      if (h_r[cyc] !== apply(ctrl_of(o), x, beff, ctrl_of(o).cin)) begin
        failures++;
        $display("reference mismatch op %s", o.name());
      end
      if (v) begin
        n_op[o]++;
        if (f) n_fb++;
        if (cyc > 0 && h_v[cyc-1]) n_b2b++;
        if (h_r[cyc][32]) n_cout++;
        if (ctrl_of(o).op_arith && ctrl_of(o).cin &&
            ((x ^ {32{ctrl_of(o).cmpl_a}}) ^ (beff ^ {32{ctrl_of(o).cmpl_b}})) == '1) n_carry_all++;
        if (o == OP_EQ) begin
          if (x == beff) n_eq_true++; else n_eq_false++;
        end
      end
      @(negedge clk);
    end
    in_valid = 0; fb = 0;
    repeat (L + 5) @(negedge clk);
    $display("feedback %0d, back-to-back %0d, full carry ripple %0d, carry-out %0d, EQ true %0d / false %0d",
             n_fb, n_b2b, n_carry_all, n_cout, n_eq_true, n_eq_false);
    checks += 6;
    if (n_fb == 0)        begin failures++; $display("feedback never happened"); end
    if (n_b2b == 0)       begin failures++; $display("back-to-back issue never happened"); end
    if (n_carry_all == 0) begin failures++; $display("full carry ripple never happened"); end
    if (n_cout == 0)      begin failures++; $display("carry-out never happened"); end
    if (n_eq_true == 0)   begin failures++; $display("EQ true never happened"); end
    if (n_eq_false == 0)  begin failures++; $display("EQ false never happened"); end
    for (int i = 0; i < 8; i++) begin
      checks++;
      if (n_op[i] == 0) begin failures++; $display("operation %0d never issued", i); end
    end
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
