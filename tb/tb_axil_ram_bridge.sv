// tb_axil_ram_bridge: an AXI4-Lite master with random valid/ready delays
// writes and reads a memory model behind the bridge. Checks read data, that
// each write reaches the memory exactly once, the one-clock RAM_RCE read
// timing, and that responses are held while the master is not ready.
`timescale 1ns/1fs
module tb_axil_ram_bridge;
  logic clk = 0, rst_n = 1;
  logic [15:0] awaddr = 0, araddr = 0;
  logic awvalid = 0, wvalid = 0, bready = 0, arvalid = 0, rready = 0;
  logic awready, wready, bvalid, arready, rvalid;
  logic [31:0] wdata = 0, rdata;
  logic [1:0] bresp, rresp;
  logic [13:0] ram_addr;
  logic [31:0] ram_wdata, ram_rdata;
  logic ram_we, ram_rce;
  logic [31:0] mem [16384];
  logic [31:0] model [16384];
  int n_we = 0, n_stall = 0;
  int checks = 0, failures = 0;

  axil_ram_bridge dut (
    .clk, .rst_n,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(4'hF), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .ram_addr_o(ram_addr), .ram_wdata_o(ram_wdata), .ram_we_o(ram_we), .ram_rce_o(ram_rce), .ram_rdata_i(ram_rdata)
  );

  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    if (ram_we) begin mem[ram_addr] <= ram_wdata; n_we <= n_we + 1; end
    if (ram_rce) ram_rdata <= mem[ram_addr];
    if (rvalid && !rready) n_stall <= n_stall + 1;
  end

  task automatic axi_write(input logic [15:0] a, input logic [31:0] d);
    awaddr = a; wdata = d; awvalid = 1;
    repeat ($urandom % 3) @(negedge clk);
    wvalid = 1;
    #1;
    while (!(awready && wready)) begin @(negedge clk); #1; end
    @(negedge clk); awvalid = 0; wvalid = 0;
    repeat ($urandom % 3) @(negedge clk);
    bready = 1;
    #1;
    while (!bvalid) begin @(negedge clk); #1; end
    checks++;
    if (bresp !== 2'b00) begin failures++; $display("FAIL bresp"); end
    @(negedge clk); bready = 0;
  endtask

  task automatic axi_read(input logic [15:0] a, output logic [31:0] d);
    araddr = a; arvalid = 1;
    #1;
    while (!arready) begin @(negedge clk); #1; end
    @(negedge clk); arvalid = 0;
    repeat ($urandom % 4) @(negedge clk);
    rready = 1;
    #1;
    while (!rvalid) begin @(negedge clk); #1; end
    d = rdata;
    @(negedge clk); rready = 0;
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    int n_wr;
    n_wr = 0;
    #1 rst_n = 0; #1 rst_n = 1;
    for (int i = 0; i < 16384; i++) begin mem[i] = 0; model[i] = 0; end
    @(negedge clk);
    for (int t = 0; t < 600; t++) begin
      logic [13:0] w;
      w = 14'($urandom % 256);
      if ($urandom % 2) begin
        d = $urandom;
        axi_write({w, 2'b00}, d);
        model[w] = d;
        n_wr++;
      end else begin
        axi_read({w, 2'b00}, d);
        checks++;
        if (d !== model[w]) begin failures++; $display("FAIL read %0d: %h exp %h", w, d, model[w]); end
      end
    end
    repeat (2) @(negedge clk);
    checks++;
    if (n_we != n_wr) begin failures++; $display("FAIL %0d RAM writes for %0d AXI writes", n_we, n_wr); end
    checks++;
    if (n_stall == 0) begin failures++; $display("FAIL read back-pressure never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
