// axil_ram_bridge: AXI4-Lite slave that turns each bus transaction into one
// access on the ANN's simple memory-style bus (RAM_ADDR, RAM_WDATA, RAM_WE,
// RAM_RCE, RAM_RDATA - the signal names of the paper's block diagram).
// Write: when AWVALID and WVALID are both high and no response is pending, the
// bridge raises AWREADY, WREADY and RAM_WE for one clock and then holds BVALID
// (OKAY) until BREADY. Read: ARREADY and RAM_RCE for one clock; RAM_RDATA is
// taken the next clock and held on RDATA with RVALID until RREADY. A write wins
// if both arrive together. WSTRB is ignored: every register is written as a
// whole word. RAM_ADDR is the 32-bit word address (byte address bits [15:2]).
// The paper says only that the host talks to the ANN over AXI; the AXI4-Lite
// flavour, widths and this timing are this design's choices.
`timescale 1ns/1fs
module axil_ram_bridge #(
  parameter int unsigned ADDR_W = 16,
  parameter int unsigned DATA_W = 32,
  localparam int unsigned RAW = ADDR_W - 2
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
  input  logic [ADDR_W-1:0] s_axi_awaddr,
  input  logic              s_axi_awvalid,
  output logic              s_axi_awready,
  input  logic [DATA_W-1:0] s_axi_wdata,
  input  logic [DATA_W/8-1:0] s_axi_wstrb,
  input  logic              s_axi_wvalid,
  output logic              s_axi_wready,
  output logic [1:0]        s_axi_bresp,
  output logic              s_axi_bvalid,
  input  logic              s_axi_bready,
  input  logic [ADDR_W-1:0] s_axi_araddr,
  input  logic              s_axi_arvalid,
  output logic              s_axi_arready,
  output logic [DATA_W-1:0] s_axi_rdata,
  output logic [1:0]        s_axi_rresp,
  output logic              s_axi_rvalid,
  input  logic              s_axi_rready,
  // memory-style bus to the ANN
  output logic [RAW-1:0]    ram_addr_o,
  output logic [DATA_W-1:0] ram_wdata_o,
  output logic              ram_we_o,
  output logic              ram_rce_o,
  input  logic [DATA_W-1:0] ram_rdata_i
);
  logic do_wr, do_rd, rd_pend;
  logic unused_wstrb;

  assign unused_wstrb = ^s_axi_wstrb;   // full-word writes only

  assign do_wr = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;
  assign do_rd = s_axi_arvalid && !rd_pend && !s_axi_rvalid && !do_wr;

  assign s_axi_awready = do_wr;
  assign s_axi_wready  = do_wr;
  assign s_axi_arready = do_rd;
  assign s_axi_bresp   = 2'b00;
  assign s_axi_rresp   = 2'b00;

  assign ram_we_o    = do_wr;
  assign ram_rce_o   = do_rd;
  assign ram_addr_o  = do_wr ? s_axi_awaddr[ADDR_W-1:2] : s_axi_araddr[ADDR_W-1:2];
  assign ram_wdata_o = s_axi_wdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axi_bvalid <= 1'b0;
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
      rd_pend      <= 1'b0;
    end else begin
      if (do_wr)                          s_axi_bvalid <= 1'b1;
      else if (s_axi_bready)              s_axi_bvalid <= 1'b0;
      rd_pend <= do_rd;
      if (rd_pend) begin
        s_axi_rvalid <= 1'b1;
        s_axi_rdata  <= ram_rdata_i;
      end else if (s_axi_rready) begin
        s_axi_rvalid <= 1'b0;
      end
    end
  end

  // AXI rule: a response stays valid and unchanged until it is accepted.
  a_r_stable: assert property (@(posedge clk) disable iff (!rst_n)
      s_axi_rvalid && !s_axi_rready |=> s_axi_rvalid && $stable(s_axi_rdata));
  a_b_stable: assert property (@(posedge clk) disable iff (!rst_n)
      s_axi_bvalid && !s_axi_bready |=> s_axi_bvalid);
endmodule
