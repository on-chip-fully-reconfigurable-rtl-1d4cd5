// coef_mem: the weights-and-biases memory, DEPTH x WIDTH (1024 x 10 bit =
// 10.24 kbit, the paper's size), dual-ported. Port A belongs to the bus: a
// write when a_en_i && a_we_i, otherwise a read. Port B is the controller's
// read port. Both ports read synchronously: data appears one clock after the
// enable. Coefficients are signed two's complement with 8 fractional bits.
// On chip this would be an SRAM macro; here it is an inferred array.
`timescale 1ns/1fs
module coef_mem #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WIDTH = 10,
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
