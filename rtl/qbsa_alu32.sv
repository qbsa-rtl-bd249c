// qbsa_alu32: the 32-bit block-skewed ALU (eight 4-bit slices).
//
// Main idea: a wide gate-level pipeline is hard to keep busy when each
// operation needs the previous result. Here the word is split into N_BLOCKS
// 4-bit slices that start one cycle apart (slice k at t0+k+1). Each slice's
// core only needs the carry from the slice below five stages after its own
// operands, and that carry (C_out_early) is ready exactly then, so the carry
// ripples one slice per cycle while the slices overlap. The low slices
// finish first and can feed their result straight back into their own B
// input, so a dependent operation may issue 8 cycles after its producer
// instead of waiting for the whole word (15 cycles).
// Interface: operands, control word and fb are issued together at t0 with
// in_valid. Independent operations may issue every cycle.
//   s_skewed[4k+3:4k] / blk_valid[k]  result of slice k at t0+8+k
//   s, cout, cout_early, out_valid    whole word at t0+7+N_BLOCKS (15)
// fb=1 makes the operation use the previous result in place of B; that
// result must be the operation issued exactly 8 cycles earlier (the
// feedback register of each slice holds its latest output).
// Following the published design: eight skewed Sklansky slices, the
// C_out_early chain, C_out one stage after C_out_early, latency 15,
// initiation interval 8 for dependent and 1 for independent operations.
// This design's own choices: the valid bits and the de-skew registers that
// line the low slices up with the top one for the aligned output s.
module qbsa_alu32
  import qbsa_pkg::*;
#(
  parameter int unsigned N_BLOCKS = qbsa_pkg::NUM_BLOCKS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [BLOCK_W*N_BLOCKS-1:0]   a,
  input  logic [BLOCK_W*N_BLOCKS-1:0]   b,
  input  alu_ctrl_t               ctrl,
  input  logic                    fb,
  output logic [BLOCK_W*N_BLOCKS-1:0]   s_skewed,
  output logic [N_BLOCKS-1:0]     blk_valid,
  output logic [BLOCK_W*N_BLOCKS-1:0]   s,
  output logic                    out_valid,
  output logic                    cout,
  output logic                    cout_early
);

  logic [N_BLOCKS-1:0] c_early;   // C_out_early of each slice
  logic [N_BLOCKS-1:0] c_out;

  for (genvar k = 0; k < int'(N_BLOCKS); k++) begin : g_blk
    logic cin_k;
    if (k == 0) begin : g_first
      assign cin_k = 1'b0;          // first slice takes ctrl.cin instead
    end else begin : g_rest
      assign cin_k = c_early[k-1];
    end

    qbsa_slice #(.K(k)) u_slice (
      .clk, .rst_n,
      .in_valid,
      .a(a[BLOCK_W*k +: BLOCK_W]), .b(b[BLOCK_W*k +: BLOCK_W]),
      .ctrl, .fb,
      .cin_late(cin_k),
      .s(s_skewed[BLOCK_W*k +: BLOCK_W]),
      .cout_early(c_early[k]),
      .cout(c_out[k]),
      .out_valid(blk_valid[k])
    );

    // de-skew: hold slice k's bits until the top slice is done
    if (k == int'(N_BLOCKS) - 1) begin : g_top
      assign s[BLOCK_W*k +: BLOCK_W] = s_skewed[BLOCK_W*k +: BLOCK_W];
    end else begin : g_align
      dff_chain #(.WIDTH(BLOCK_W), .DEPTH(N_BLOCKS-1-k)) u_align (
        .clk, .rst_n, .d(s_skewed[BLOCK_W*k +: BLOCK_W]), .q(s[BLOCK_W*k +: BLOCK_W])
      );
    end
  end

  assign out_valid = blk_valid[N_BLOCKS-1];
  assign cout      = c_out[N_BLOCKS-1];

  dff_chain #(.WIDTH(1), .DEPTH(1)) u_ce_align (
    .clk, .rst_n, .d(c_early[N_BLOCKS-1]), .q(cout_early)
  );

  // every issued operation completes CORE_DEPTH + N_BLOCKS cycles later
  a_latency: assert property (
    @(posedge clk) disable iff (!rst_n) in_valid |-> ##(CORE_DEPTH + N_BLOCKS) out_valid
  ) else $error("qbsa_alu32: result missing %0d cycles after issue", CORE_DEPTH + N_BLOCKS);

endmodule
