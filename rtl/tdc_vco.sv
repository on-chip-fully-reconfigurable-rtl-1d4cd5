// tdc_vco: BEHAVIOURAL MODEL (not synthesizable) of the TDC's four-stage
// voltage-controlled ring oscillator. On chip this is a full-custom ring of
// buffers, inverters and NAND gates on its own supply (VDD_RING); here it is a
// state machine that advances one ring state every STAGE_DELAY_NS while EN is
// high. A four-stage ring with one inversion walks through eight states per
// period (0000,0001,0011,0111,1111,1110,1100,1000, bit 0 = Q<0>), so Q<3>
// falls once per period and clocks the ripple counter. When EN falls the state
// freezes. Q<0:2> pass through buffers enabled by EN_read (they read 0
// otherwise); Q<3> has an always-on buffer, as in the paper. nRST forces the
// all-zero state. The stage delay default, 26.75 ps, is half the paper's
// average LSB of 53.5 ps: with the decoder used here one LSB is two stages.
`timescale 1ns/1fs
module tdc_vco #(
  parameter realtime STAGE_DELAY_NS = 0.02675
) (
  input  logic       en_i,
  input  logic       en_read_i,
  input  logic       nrst_i,
  output logic [3:0] q_o
);
  logic [3:0] ring;

  initial ring = '0;

  always begin
    if (!nrst_i) begin
      ring = '0;
      @(posedge nrst_i);
    end else if (en_i) begin
      #(STAGE_DELAY_NS);
      if (en_i && nrst_i) ring = {ring[2:0], ~ring[3]};
    end else begin
      @(posedge en_i or negedge nrst_i);
    end
  end

  assign q_o = {ring[3], en_read_i ? ring[2:0] : 3'b000};
endmodule
