// smarty_top: the whole design - ten TDCs (clock domain 1, asynchronous)
// feeding a reconfigurable feed-forward neural network (clock domain 2, CLK)
// that the host configures and reads over AXI4-Lite. A measurement: pulse
// TDC_nRST low, start the TDCs (per-channel TDC_START_SPAD, TDC_START_ALL or
// TDC_START_ELECTRIC to the channel chosen by TDC_CNT_SEL), stop them all with
// TDC_STOP_ELECTRIC, then write CTRL.START over AXI; the ANN captures the ten
// codes, evaluates the network stored in its topology and coefficient memories
// and sets STATUS.done, after which the outputs are read from the neuron
// memory. TDC_CNT_OUT shows the 7th counter bit of the selected TDC. nrst_all
// resets the ANN domain (active low). The pads and their names follow the
// paper's block diagram; the reference TDC and the PLL output pad of that
// diagram are not included. ann_done_o is a one-clock pulse per inference
// (an extra pin for an interrupt; not in the paper).
`timescale 1ns/1fs
module smarty_top
  import smarty_pkg::*;
(
  input  logic               clk,
  input  logic               nrst_all,
  // AXI4-Lite slave (host)
  input  logic [15:0]        s_axi_awaddr,
  input  logic               s_axi_awvalid,
  output logic               s_axi_awready,
  input  logic [31:0]        s_axi_wdata,
  input  logic [3:0]         s_axi_wstrb,
  input  logic               s_axi_wvalid,
  output logic               s_axi_wready,
  output logic [1:0]         s_axi_bresp,
  output logic               s_axi_bvalid,
  input  logic               s_axi_bready,
  input  logic [15:0]        s_axi_araddr,
  input  logic               s_axi_arvalid,
  output logic               s_axi_arready,
  output logic [31:0]        s_axi_rdata,
  output logic [1:0]         s_axi_rresp,
  output logic               s_axi_rvalid,
  input  logic               s_axi_rready,
  // TDC pads
  input  logic [N_TDC-1:0]   tdc_start_spad,
  input  logic               tdc_stop_electric,
  input  logic               tdc_nrst,
  input  logic               tdc_start_all,
  input  logic               tdc_start_electric,
  input  logic [3:0]         tdc_cnt_sel,
  output logic               tdc_cnt_out,
  output logic               ann_done_o
);
  tdc_code_t          codes [N_TDC];
  logic [N_TDC-1:0]   b2_unused;
  logic [RAM_AW-1:0]  ram_addr;
  logic [31:0]        ram_wdata, ram_rdata;
  logic               ram_we, ram_rce, ann_busy;

  tdc_bank u_tdcs (
    .tdc_start_spad_i    (tdc_start_spad),
    .tdc_stop_electric_i (tdc_stop_electric),
    .tdc_nrst_i          (tdc_nrst),
    .tdc_start_all_i     (tdc_start_all),
    .tdc_start_electric_i(tdc_start_electric),
    .tdc_cnt_sel_i       (tdc_cnt_sel),
    .tdc_cnt_out_o       (tdc_cnt_out),
    .codes_o             (codes),
    .b2_o                (b2_unused)
  );

  axil_ram_bridge u_bridge (
    .clk, .rst_n(nrst_all),
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready,
    .s_axi_wdata, .s_axi_wstrb, .s_axi_wvalid, .s_axi_wready,
    .s_axi_bresp, .s_axi_bvalid, .s_axi_bready,
    .s_axi_araddr, .s_axi_arvalid, .s_axi_arready,
    .s_axi_rdata, .s_axi_rresp, .s_axi_rvalid, .s_axi_rready,
    .ram_addr_o (ram_addr),
    .ram_wdata_o(ram_wdata),
    .ram_we_o   (ram_we),
    .ram_rce_o  (ram_rce),
    .ram_rdata_i(ram_rdata)
  );

  ann u_ann (
    .clk, .rst_n(nrst_all),
    .ram_addr_i (ram_addr),
    .ram_wdata_i(ram_wdata),
    .ram_we_i   (ram_we),
    .ram_rce_i  (ram_rce),
    .ram_rdata_o(ram_rdata),
    .tdc_codes_i(codes),
    .busy_o     (ann_busy),
    .done_o     (ann_done_o)
  );
endmodule
