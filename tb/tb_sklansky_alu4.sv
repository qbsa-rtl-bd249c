// tb_sklansky_alu4: self-checking testbench of the 4-bit Sklansky ALU block.
//
// Instantiates both variants side by side: the first block (carry-in with
// the operands, delayed inside) and the delayed-carry block (carry-in fed
// five cycles after its operands). Every cycle both receive a new random
// operation (random operands, random row of the operation table, random
// carry). A reference computed here with a plain bit-serial ripple model of
// the operation table predicts s, cout_early and cout; the testbench checks
// them at exactly 7 and 6 cycles after issue, which also checks the latency
// and the one-operation-per-cycle rate. Directed cases check ADD/SUB/logic
// results against ordinary integer arithmetic.
module tb_sklansky_alu4;
  import qbsa_pkg::*;

  localparam int N_OPS = 3000;

  logic clk = 1'b0;
  logic rst_n;
  logic [3:0] a, b;
  alu_ctrl_t  ctrl;
  logic       cin_late;
  logic [3:0] s0, s1;
  logic       ce0, ce1, co0, co1;

  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sklansky_alu4 #(.FIRST_BLOCK(1'b1)) dut_first (
    .clk, .rst_n, .a, .b, .ctrl, .cin_late(1'b0),
    .s(s0), .cout_early(ce0), .cout(co0));
  sklansky_alu4 #(.FIRST_BLOCK(1'b0)) dut_dcin (
    .clk, .rst_n, .a, .b, .ctrl, .cin_late,
    .s(s1), .cout_early(ce1), .cout(co1));

  function automatic alu_ctrl_t ctrl_of(int unsigned row);
    case (row % 8)
      0: return '{1,0,1,0,0,0};   // ADD
      1: return '{1,0,1,0,1,1};   // SUB
      2: return '{1,0,1,0,1,1};   // SLT
      3: return '{0,0,1,0,1,1};   // EQ
      4: return '{0,1,0,0,0,0};   // AND
      5: return '{0,1,1,0,0,0};   // OR
      6: return '{0,0,1,0,0,0};   // XOR
      default: return '{0,1,0,1,1,0}; // NOR
    endcase
  endfunction

  // reference: ripple through the bits one at a time
  function automatic logic [4:0] ref_alu(logic [3:0] ra, logic [3:0] rb,
                                         alu_ctrl_t c, logic cin);
    logic [3:0] r;
    logic cy = cin;
    for (int i = 0; i < 4; i++) begin
      logic x = ra[i] ^ c.cmpl_a;
      logic y = rb[i] ^ c.cmpl_b;
      logic gen = x & y, prop = x ^ y;
      r[i] = ((c.op_and & gen) | (c.op_xor & prop)) ^ cy;
      cy = (gen & c.op_arith) | (prop & cy);
    end
    return {cy, r};
  endfunction

  // expected values indexed by issue cycle
  logic [4:0] exp0 [N_OPS + 20];
  logic [4:0] exp1 [N_OPS + 20];
  logic       cin_hist [N_OPS + 20];
  int cyc = 0;
  int issue_cycle = -1;

  always @(posedge clk) if (rst_n) cyc <= cyc + 1;

  // delayed-carry block: its carry for the operation of cycle c is driven at c+5
  always_comb cin_late = (cyc >= 5) ? cin_hist[cyc-5] : 1'b0;

  // checker
  always @(negedge clk) begin
    if (rst_n) begin
      if (cyc >= 7 && cyc - 7 < N_OPS) begin
        checks += 4;
        if (s0 !== exp0[cyc-7][3:0]) begin failures++; $display("first s  cyc=%0d got %h exp %h", cyc, s0, exp0[cyc-7][3:0]); end
        if (co0 !== exp0[cyc-7][4])  begin failures++; $display("first co cyc=%0d", cyc); end
        if (s1 !== exp1[cyc-7][3:0]) begin failures++; $display("dcin s   cyc=%0d got %h exp %h", cyc, s1, exp1[cyc-7][3:0]); end
        if (co1 !== exp1[cyc-7][4])  begin failures++; $display("dcin co  cyc=%0d", cyc); end
      end
      if (cyc >= 6 && cyc - 6 < N_OPS) begin
        checks += 2;
        if (ce0 !== exp0[cyc-6][4]) begin failures++; $display("first ce cyc=%0d", cyc); end
        if (ce1 !== exp1[cyc-6][4]) begin failures++; $display("dcin ce  cyc=%0d", cyc); end
      end
    end
  end

  // directed: integer arithmetic on the first block
  task automatic directed(logic [3:0] da, logic [3:0] db, int unsigned row, logic [4:0] want);
    logic [4:0] got = ref_alu(da, db, ctrl_of(row), ctrl_of(row).cin);
    checks++;
    if (got !== want) begin failures++; $display("reference self-test row %0d %h %h: %h != %h", row, da, db, got, want); end
  endtask

  initial begin
    rst_n = 1'b0;
    a = '0; b = '0; ctrl = '0;
    for (int i = 0; i < N_OPS + 20; i++) cin_hist[i] = 1'b0;
    // the reference model against ordinary arithmetic
    for (int x = 0; x < 16; x++)
      for (int y = 0; y < 16; y++) begin
        directed(4'(x), 4'(y), 0, 5'(x + y));
        directed(4'(x), 4'(y), 1, 5'(x + (15 - y) + 1));
        directed(4'(x), 4'(y), 4, {1'b0, 4'(x & y)});
        directed(4'(x), 4'(y), 5, {1'b0, 4'(x | y)});
        directed(4'(x), 4'(y), 6, {1'b0, 4'(x ^ y)});
        directed(4'(x), 4'(y), 7, {1'b0, ~4'(x | y)});
        directed(4'(x), 4'(y), 3, {x == y, x == y ? 4'h0 : ref_alu(4'(x), 4'(y), ctrl_of(3), 1'b1)[3:0]});
      end
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < N_OPS; i++) begin
      logic ci;
      a    = 4'($urandom);
      b    = 4'($urandom);
      ctrl = ctrl_of($urandom);
      ci   = ($urandom % 4 == 0) ? ~ctrl.cin : ctrl.cin;
      ctrl.cin = ci;
      cin_hist[i] = ci;
      exp0[i] = ref_alu(a, b, ctrl, ci);
      exp1[i] = ref_alu(a, b, ctrl, ci);
      @(negedge clk);
    end
    repeat (12) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (N_OPS + 500) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
