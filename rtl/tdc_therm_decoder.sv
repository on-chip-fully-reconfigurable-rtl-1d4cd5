// tdc_therm_decoder: turns the four frozen ring phases Q<0:3> into the fine
// part of the TDC code. The ring state index p (0..7 within one oscillation
// period) is recovered from the phase pattern: when Q<0> is high, p is the
// number of ones (0001->1 ... 1111->4); when Q<0> is low, p = 8 - ones (1110->5,
// 1100->6, 1000->7, 0000->0). The paper's result equation N = 4*coarse + fine,
// and its wiring of B0,B1 to TDC_out<0:1>, need four fine codes per counter
// step, so the outputs are B1:B0 = p[2:1] and B2 = p[0] (a half-LSB bit that
// is not part of the 22-bit code). The table itself is this design's choice;
// the paper does not print it. Purely combinational.
`timescale 1ns/1fs
module tdc_therm_decoder (
  input  logic [3:0] q_i,  // bit k = Q<k>
  output logic [2:0] b_o   // bit k = Bk
);
  logic [2:0] ones;
  logic [2:0] p;

  always_comb begin
    ones = 3'(q_i[0]) + 3'(q_i[1]) + 3'(q_i[2]) + 3'(q_i[3]);
    if (q_i[0])          p = ones;
    else if (ones == 0)  p = 3'd0;
    else                 p = 3'(4'd8 - 4'(ones));
    b_o = {p[0], p[2:1]};
  end
endmodule
