// nn_processor: one of the ANN's four processors, a multiply-accumulate unit
// with a ReLU at its output (multiplier, adder and ReLU as in the paper's ANN
// diagram). load_bias_i starts a neuron with acc = bias (the 10-bit coefficient,
// sign-extended; both use 8 fractional bits). mac_i adds act*coef: the 42-bit
// product is shifted right by 8 (truncating) and added with saturation to the
// 32-bit range. y_o = max(acc, 0) is valid the clock after the last mac_i.
// Rounding, saturation and applying ReLU to every layer are this design's
// reading of the paper, which shows the ReLU on the only path to the neuron
// memory but does not give the arithmetic details.
`timescale 1ns/1fs
module nn_processor
  import smarty_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  load_bias_i,
  input  logic  mac_i,
  input  coef_t coef_i,
  input  act_t  act_i,
  output act_t  y_o
);
  act_t acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           acc <= '0;
    else if (load_bias_i) acc <= act_t'(coef_i);
    else if (mac_i)       acc <= mac_sat(acc, act_i, coef_i);
  end

  assign y_o = relu(acc);

  // The controller never asks for both operations in one cycle.
  a_one_op: assert property (@(posedge clk) disable iff (!rst_n) !(load_bias_i && mac_i))
    else $error("nn_processor: load_bias and mac in the same cycle");
endmodule
