// neuron_mem: the neuron memory, DEPTH x WIDTH (128 x 32 bit = 4096 bit, the
// paper's size), dual-ported. Every neuron's ReLU output is stored at its
// global index (input layer first). Port A is the bus side (the "OUT ANN"
// readout, and writes for test); port B is the controller's side, which reads
// activations of the previous layer and writes the results of the current one.
// Each port does a write when en && we, otherwise a read whose data appears one
// clock later. Simultaneous writes to one address from both ports are not
// arbitrated; software does not access the memory while the ANN runs.
`timescale 1ns/1fs
module neuron_mem #(
  parameter int unsigned DEPTH = 128,
  parameter int unsigned WIDTH = 32,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             a_en_i,
  input  logic             a_we_i,
  input  logic [AW-1:0]    a_addr_i,
  input  logic [WIDTH-1:0] a_wdata_i,
  output logic [WIDTH-1:0] a_rdata_o,
  input  logic             b_en_i,
  input  logic             b_we_i,
  input  logic [AW-1:0]    b_addr_i,
  input  logic [WIDTH-1:0] b_wdata_i,
  output logic [WIDTH-1:0] b_rdata_o
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en_i) begin
      if (a_we_i) mem[a_addr_i] <= a_wdata_i;
      else        a_rdata_o     <= mem[a_addr_i];
    end
    if (b_en_i) begin
      if (b_we_i) mem[b_addr_i] <= b_wdata_i;
      else        b_rdata_o     <= mem[b_addr_i];
    end
  end
endmodule
