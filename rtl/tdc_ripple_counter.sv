// tdc_ripple_counter: WIDTH-bit asynchronous ripple counter of the TDC (coarse
// part of the result). Stage 0 toggles on every falling edge of its clock input
// (the ring phase Q<3>, pin nCLK); stage k toggles on the falling edge of stage
// k-1, so the word counts up. nrst_i clears every stage asynchronously. The
// output is only meaningful once the oscillator has stopped and the ripple has
// settled; there is no synchronous clock in this block.
`timescale 1ns/1fs
module tdc_ripple_counter #(
  parameter int unsigned WIDTH = 20
) (
  input  logic             nclk_i,
  input  logic             nrst_i,
  output logic [WIDTH-1:0] q_o
);
  logic [WIDTH:0] clk_chain;  // clk_chain[WIDTH] is the carry out, left open
  assign clk_chain[0] = nclk_i;

  for (genvar k = 0; k < WIDTH; k++) begin : g_stage
    logic tff;  // one toggle flip-flop per stage
    always_ff @(negedge clk_chain[k] or negedge nrst_i) begin
      if (!nrst_i) tff <= 1'b0;
      else         tff <= ~tff;
    end
    assign q_o[k]         = tff;
    assign clk_chain[k+1] = tff;
  end
endmodule
