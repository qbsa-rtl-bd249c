// dff_chain: a delay line of DEPTH register stages, WIDTH bits wide.
//
// Models the strings of DFFs that skew operands and controls in the
// block-skewed ALU and that hold early result bits until the last block is
// done. q is d delayed by exactly DEPTH (at least 1) clock cycles.
// Synchronous active-low reset clears every stage.
module dff_chain #(
  parameter int unsigned WIDTH = 1,
  parameter int unsigned DEPTH = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);

  logic [DEPTH-1:0][WIDTH-1:0] stage;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(DEPTH); i++) stage[i] <= '0;
    end else begin
      stage[0] <= d;
      for (int i = 1; i < int'(DEPTH); i++) stage[i] <= stage[i-1];
    end
  end

  assign q = stage[DEPTH-1];

  initial assert (DEPTH >= 1) else $error("dff_chain: DEPTH must be at least 1");

endmodule
