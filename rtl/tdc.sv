// tdc: one time-to-digital converter. START sets the SR latch and the ring
// oscillator runs until STOP; the ripple counter counts ring periods on the
// falling edge of Q<3> and the thermometer decoder turns the frozen phases
// into two fine bits. Result (paper's equation): code = 4*counter + fine, on
// 22 bits, with counter bits at TDC_out<2:21> and B0,B1 at TDC_out<0:1> as in
// the paper's TDC diagram. One LSB is two ring stages (about 53.5 ps). The code
// is valid from shortly after STOP rises until the next START; nrst_i must be
// pulsed low before each measurement to clear the counter and ring. cnt_mon_o
// is counter bit 6, the "7th counter bit" used to measure the ring frequency.
`timescale 1ns/1fs
module tdc
  import smarty_pkg::*;
#(
  parameter int unsigned CNT_BITS = TDC_CNT_BITS
) (
  input  logic                start_i,
  input  logic                stop_i,
  input  logic                nrst_i,
  output logic [CNT_BITS+1:0] code_o,
  output logic                b2_o,
  output logic                cnt_mon_o
);
  logic               en, en_read;
  logic [3:0]         q;
  logic [2:0]         b;
  logic [CNT_BITS-1:0] cnt;

  tdc_sr_latch u_latch (.start_i, .stop_i, .nrst_i, .en_o(en), .en_read_o(en_read));
  tdc_vco      u_vco   (.en_i(en), .en_read_i(en_read), .nrst_i, .q_o(q));
  tdc_ripple_counter #(.WIDTH(CNT_BITS)) u_cnt (.nclk_i(q[3]), .nrst_i, .q_o(cnt));
  tdc_therm_decoder u_dec (.q_i(q), .b_o(b));

  assign code_o    = {cnt, b[1:0]};
  assign b2_o      = b[2];
  assign cnt_mon_o = cnt[TDC_MON_BIT];
endmodule
