// tb_topo_mem: writes random data through port A, reads every word back through
// port A and port B and compares with a testbench copy of the contents
// (port B reads). Checks the one-clock read latency and that a disabled port
// holds its last read data.
`timescale 1ns/1fs
module tb_topo_mem;
  localparam int D = 78, W = 8, AW = $clog2(D);
  logic clk = 0;
  logic a_en = 0, a_we = 0, b_en = 0;
  logic [AW-1:0] a_addr = '0, b_addr = '0;
  logic [W-1:0] a_wdata = '0, a_rdata, b_rdata;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  topo_mem #(.DEPTH(D), .WIDTH(W)) dut (
    .clk, .a_en_i(a_en), .a_we_i(a_we), .a_addr_i(a_addr), .a_wdata_i(a_wdata), .a_rdata_o(a_rdata),
    .b_en_i(b_en), .b_addr_i(b_addr), .b_rdata_o(b_rdata)
  );

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] held;
    @(negedge clk);
    for (int i = 0; i < D; i++) begin
      a_en = 1; a_we = 1; a_addr = AW'(i); a_wdata = W'($urandom); model[i] = a_wdata;
      @(negedge clk);
    end
    a_we = 0;
    for (int i = 0; i < D; i++) begin
      int j;
      j = D - 1 - i;
      a_en = 1; a_addr = AW'(i);
      b_en = 1; b_addr = AW'(j);
      @(negedge clk);
      checks += 2;
      if (a_rdata !== model[i]) begin failures++; $display("FAIL A[%0d]=%h exp %h", i, a_rdata, model[i]); end
      if (b_rdata !== model[j]) begin failures++; $display("FAIL B[%0d]=%h exp %h", j, b_rdata, model[j]); end
    end
    held = b_rdata;
    b_en = 0; b_addr = 0; a_en = 0;
    repeat (2) @(negedge clk);
    checks++;
    if (b_rdata !== held) begin failures++; $display("FAIL port B did not hold its data"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
