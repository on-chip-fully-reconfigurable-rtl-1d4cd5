// tdc_bank: the ten TDCs of clock domain 1 with their start logic and the
// frequency-monitor multiplexer. Each TDC starts on any of three sources:
// its own photodetector start (TDC_START_SPAD[j]), TDC_START_ALL, or
// TDC_START_ELECTRIC when TDC_CNT_SEL selects channel j. TDC_STOP_ELECTRIC
// stops all ten together and TDC_nRST clears them. TDC_CNT_OUT is the 7th
// counter bit of the TDC chosen by TDC_CNT_SEL (0 for selects 10..15). The
// three start sources, the start demultiplexer and the monitor multiplexer
// follow the paper's block diagram; combining the starts with an OR is this
// design's choice. All of this is asynchronous logic; codes_o is read by the
// ANN clock domain after STOP.
`timescale 1ns/1fs
module tdc_bank
  import smarty_pkg::*;
#(
  parameter int unsigned N = N_TDC
) (
  input  logic [N-1:0]  tdc_start_spad_i,
  input  logic          tdc_stop_electric_i,
  input  logic          tdc_nrst_i,
  input  logic          tdc_start_all_i,
  input  logic          tdc_start_electric_i,
  input  logic [3:0]    tdc_cnt_sel_i,
  output logic          tdc_cnt_out_o,
  output tdc_code_t     codes_o [N],
  output logic [N-1:0]  b2_o
);
  logic [N-1:0] start, mon;

  for (genvar j = 0; j < N; j++) begin : g_tdc
    assign start[j] = tdc_start_spad_i[j] | tdc_start_all_i |
                      (tdc_start_electric_i && (tdc_cnt_sel_i == 4'(j)));
    tdc u_tdc (
      .start_i   (start[j]),
      .stop_i    (tdc_stop_electric_i),
      .nrst_i    (tdc_nrst_i),
      .code_o    (codes_o[j]),
      .b2_o      (b2_o[j]),
      .cnt_mon_o (mon[j])
    );
  end

  assign tdc_cnt_out_o = (32'(tdc_cnt_sel_i) < N) ? mon[tdc_cnt_sel_i] : 1'b0;
endmodule
