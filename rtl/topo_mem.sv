// topo_mem: the 624-bit topology memory, 78 words of 8 bits. Word 0 holds the
// number of layers L (input layer included), word l+1 the number of neurons in
// layer l; layers are fully connected to the previous one. The paper gives
// only the size; this word layout is this design's choice. Port A is the bus
// port (write when en && we, otherwise read), port B the controller's read
// port; reads return data one clock after the enable.
`timescale 1ns/1fs
module topo_mem #(
  parameter int unsigned DEPTH = 78,
  parameter int unsigned WIDTH = 8,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             a_en_i,
  input  logic             a_we_i,
  input  logic [AW-1:0]    a_addr_i,
  input  logic [WIDTH-1:0] a_wdata_i,
  output logic [WIDTH-1:0] a_rdata_o,
  input  logic             b_en_i,
  input  logic [AW-1:0]    b_addr_i,
  output logic [WIDTH-1:0] b_rdata_o
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en_i) begin
      if (a_we_i) mem[a_addr_i] <= a_wdata_i;
      else        a_rdata_o     <= mem[a_addr_i];
    end
  end

  always_ff @(posedge clk) begin
    if (b_en_i) b_rdata_o <= mem[b_addr_i];
  end
endmodule
