// sklansky_alu4: one 4-bit block of the block-skewed ALU.
//
// A gate-level pipelined ALU on a 4-bit Sklansky prefix adder. In the
// superconducting original every gate is clocked; here each gate level is one
// register stage, giving seven stages from operands to result:
//   1  a' = A ^ Cmpl_a, b' = B ^ Cmpl_b
//   2  generate g = a'&b', propagate p = a'^b'
//   3  op gating: carry generate g&Op_ARITH, result term
//      L = (Op_AND & g) | (Op_XOR & p); Op_* reach here through two DFFs
//   4  first Sklansky level (bits 1:0 and 3:2)
//   5  second Sklansky level: group generate/propagate of bits i:0
//   6  carry-in merge: c[i+1] = G[i:0] | P[i:0]&cin  -> C_out_early
//   7  S = L ^ c, and C_out = C_out_early one stage later
// The carry-in is not needed before stage 6 (after five stages), which is
// what lets the next block start before this block's carry is known.
// FIRST_BLOCK=1 is the least significant block: its carry-in arrives with
// A/B (ctrl.cin) and is delayed by five DFFs inside the block. FIRST_BLOCK=0
// is the delayed-carry variant used for the other blocks: cin_late must be
// presented exactly five cycles after the a/b it belongs to.
// Timing (cycles after a/b/ctrl are presented): cout_early 6, s and cout 7.
// A new operation can be presented every cycle.
// Following the published block: the five first-block carry DFFs, Op_*
// through two DFFs, Cmpl applied at the first level, carry entry after five
// stages, C_out_early and its one-stage-delayed C_out. This design's own
// choices: the exact split of the prefix logic into stages 3-5, the result
// equation above (it reproduces every row of the operation table), and the
// synchronous reset, which the pulse-based original does not have.
module sklansky_alu4
  import qbsa_pkg::*;
#(
  parameter bit FIRST_BLOCK = 1'b0
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [3:0]      a,
  input  logic [3:0]      b,
  input  alu_ctrl_t       ctrl,
  input  logic            cin_late,
  output logic [3:0]      s,
  output logic            cout_early,
  output logic            cout
);

  // ---- stage 1: operand complement -------------------------------------
  logic [3:0] ap1, bp1;
  logic       arith1, and1, xor1;
  // ---- stage 2: generate / propagate -----------------------------------
  logic [3:0] g2, p2;
  logic       arith2, and2, xor2;
  // ---- stage 3: op gating ----------------------------------------------
  logic [3:0] gg3, pp3, l3;
  // ---- stage 4: prefix level 1 -----------------------------------------
  logic [3:0] gg4, pp4, l4;   // [1] and [3] hold groups 1:0 and 3:2
  // ---- stage 5: prefix level 2 (group i:0) -----------------------------
  logic [3:0] gp5, pp5, l5;
  // ---- stage 6: carries --------------------------------------------------
  logic [3:0] c6, l6;
  // ---- carry-in ----------------------------------------------------------
  logic [CIN_STAGE-1:0] cin_pipe;   // first block only
  logic                 cin_at5;
  logic [4:1]           c_next;

  assign cin_at5 = FIRST_BLOCK ? cin_pipe[CIN_STAGE-1] : cin_late;

  always_comb begin
    for (int i = 0; i < 4; i++) c_next[i+1] = gp5[i] | (pp5[i] & cin_at5);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      {ap1, bp1, arith1, and1, xor1} <= '0;
      {g2, p2, arith2, and2, xor2}   <= '0;
      {gg3, pp3, l3}                 <= '0;
      {gg4, pp4, l4}                 <= '0;
      {gp5, pp5, l5}                 <= '0;
      {c6, l6, cout_early}           <= '0;
      {s, cout}                      <= '0;
      cin_pipe                       <= '0;
    end else begin
      // 1
      ap1    <= a ^ {4{ctrl.cmpl_a}};
      bp1    <= b ^ {4{ctrl.cmpl_b}};
      arith1 <= ctrl.op_arith;
      and1   <= ctrl.op_and;
      xor1   <= ctrl.op_xor;
      cin_pipe <= {cin_pipe[CIN_STAGE-2:0], FIRST_BLOCK ? ctrl.cin : 1'b0};
      // 2
      g2     <= ap1 & bp1;
      p2     <= ap1 ^ bp1;
      arith2 <= arith1;
      and2   <= and1;
      xor2   <= xor1;
      // 3
      gg3    <= g2 & {4{arith2}};
      pp3    <= p2;
      l3     <= (g2 & {4{and2}}) | (p2 & {4{xor2}});
      // 4: Sklansky level 1, pairs (1,0) and (3,2)
      gg4[0] <= gg3[0];
      pp4[0] <= pp3[0];
      gg4[1] <= gg3[1] | (pp3[1] & gg3[0]);
      pp4[1] <= pp3[1] & pp3[0];
      gg4[2] <= gg3[2];
      pp4[2] <= pp3[2];
      gg4[3] <= gg3[3] | (pp3[3] & gg3[2]);
      pp4[3] <= pp3[3] & pp3[2];
      l4     <= l3;
      // 5: Sklansky level 2, group 1:0 fans out to bits 2 and 3
      gp5[1:0] <= gg4[1:0];
      pp5[1:0] <= pp4[1:0];
      gp5[2]   <= gg4[2] | (pp4[2] & gg4[1]);
      pp5[2]   <= pp4[2] & pp4[1];
      gp5[3]   <= gg4[3] | (pp4[3] & gg4[1]);
      pp5[3]   <= pp4[3] & pp4[1];
      l5       <= l4;
      // 6: carry-in merge
      c6         <= {c_next[3:1], cin_at5};
      cout_early <= c_next[4];
      l6         <= l5;
      // 7: sum and delayed carry out
      s    <= l6 ^ c6;
      cout <= cout_early;
    end
  end

endmodule
