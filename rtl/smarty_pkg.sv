// smarty_pkg: constants and small arithmetic helpers shared by the TDC bank and
// the reconfigurable neural network. Sizes printed in the paper: ten TDCs with a
// 20-bit ripple counter and two fine bits, ANN limits of 128 neurons and 1024
// weights/biases, four processors, 32-bit activations, 10-bit coefficients and
// 8 fractional bits. The topology word layout and the register map are this
// design's own choices and are documented in the README.
`timescale 1ns/1fs
package smarty_pkg;

  // ---------------- TDC bank ----------------
  localparam int unsigned N_TDC        = 10;  // TDCs / ANN input channels
  localparam int unsigned TDC_CNT_BITS = 20;  // ripple counter (coarse)
  localparam int unsigned TDC_FINE     = 2;   // decoded fine bits in the code
  localparam int unsigned TDC_CODE_W   = TDC_CNT_BITS + TDC_FINE;  // 22
  localparam int unsigned ANN_IN_W     = 20;  // TDC bits taken by the ANN
  localparam int unsigned TDC_MON_BIT  = 6;   // "7th counter bit" for TDC_CNT_OUT

  typedef logic [TDC_CODE_W-1:0] tdc_code_t;

  // ---------------- ANN ----------------
  localparam int unsigned N_PROC      = 4;
  localparam int unsigned ACT_W       = 32;
  localparam int unsigned COEF_W      = 10;
  localparam int unsigned FRAC        = 8;
  localparam int unsigned MAX_NEURONS = 128;
  localparam int unsigned MAX_COEFS   = 1024;
  localparam int unsigned TOPO_WORDS  = 78;   // 78 x 8 bit = 624 bit
  localparam int unsigned TOPO_W      = 8;

  typedef logic signed [ACT_W-1:0]  act_t;
  typedef logic signed [COEF_W-1:0] coef_t;

  // ---------------- register map (32-bit word addresses) ----------------
  localparam int unsigned RAM_AW = 14;
  localparam logic [RAM_AW-1:0] A_CTRL    = 14'h000;  // b0 START (write 1), b1 BYPASS
  localparam logic [RAM_AW-1:0] A_STATUS  = 14'h001;  // b0 busy, b1 done, b2 topology error
  localparam logic [RAM_AW-1:0] A_CYCLES  = 14'h002;  // clock cycles of last inference
  localparam logic [RAM_AW-1:0] A_BYPASS  = 14'h010;  // 0x010..0x019 stand-alone inputs
  localparam logic [RAM_AW-1:0] A_TDC     = 14'h020;  // 0x020..0x029 TDC codes (read)
  localparam logic [RAM_AW-1:0] A_COEF    = 14'h400;  // 0x400..0x7FF coefficients
  localparam logic [RAM_AW-1:0] A_NEURON  = 14'h800;  // 0x800..0x87F neuron outputs
  localparam logic [RAM_AW-1:0] A_TOPO    = 14'hC00;  // 0xC00..0xC4D topology words

  // One multiply-accumulate step of a processor: acc + (act*coef >>> FRAC),
  // saturated to the 32-bit activation range.
  function automatic act_t mac_sat(act_t acc, act_t act, coef_t coef);
    logic signed [ACT_W+COEF_W-1:0] prod;
    logic signed [ACT_W+COEF_W-1:0] sum;
    prod = act * coef;
    sum  = (prod >>> FRAC) + (ACT_W+COEF_W)'(acc);
    if (sum > (ACT_W+COEF_W)'(32'sh7FFF_FFFF))
      return 32'sh7FFF_FFFF;
    else if (sum < -(ACT_W+COEF_W)'(33'sh0_8000_0000))
      return 32'sh8000_0000;
    else
      return act_t'(sum);
  endfunction

  function automatic act_t relu(act_t a);
    return (a < 0) ? '0 : a;
  endfunction

  // ANN input value of a TDC code: low 20 bits, integer, scaled to 8 fractional bits.
  function automatic act_t tdc_to_act(tdc_code_t code);
    return act_t'({{(ACT_W-ANN_IN_W-FRAC){1'b0}}, code[ANN_IN_W-1:0], {FRAC{1'b0}}});
  endfunction

endpackage
