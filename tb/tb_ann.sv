// tb_ann: drives the ANN's memory-style bus directly. Checks register and
// memory read-back (coefficients sign-extended), then runs inferences in both
// input modes - TDC codes (low 20 bits times 256) and the stand-alone bypass
// registers - and compares every neuron output with the reference model, the
// CYCLES register with the schedule, STATUS done/error, and that a START
// written while the ANN is busy is ignored.
`timescale 1ns/1fs
module tb_ann;
  import smarty_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 1;
  logic [13:0] addr = 0;
  logic [31:0] wdata = 0, rdata;
  logic we = 0, rce = 0, busy, done;
  tdc_code_t codes [10];
  int topo [78];
  int coef [1024];
  longint in_act [10];
  int checks = 0, failures = 0;

  ann dut (.clk, .rst_n, .ram_addr_i(addr), .ram_wdata_i(wdata), .ram_we_i(we), .ram_rce_i(rce),
           .ram_rdata_o(rdata), .tdc_codes_i(codes), .busy_o(busy), .done_o(done));

  always #5 clk = ~clk;

  task automatic wr(input logic [13:0] a, input logic [31:0] d);
    addr = a; wdata = d; we = 1; @(negedge clk); we = 0;
  endtask

  task automatic rd(input logic [13:0] a, output logic [31:0] d);
    addr = a; rce = 1; @(negedge clk); rce = 0; d = rdata;
  endtask

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: %0h expected %0h", what, got, exp);
    end
  endtask

  task automatic load_net();
    for (int i = 0; i < 78; i++) wr(A_TOPO + 14'(i), 32'(topo[i]));
    for (int i = 0; i < n_coefs(topo); i++) wr(A_COEF + 14'(i), 32'(coef[i]));
  endtask

  task automatic run(input bit bypass, string name);
    longint exp_out [128];
    logic [31:0] d;
    bit ok;
    ok = ref_net(topo, coef, in_act, exp_out);
    wr(A_CTRL, {30'd0, bypass, 1'b1});
    rd(A_STATUS, d);
    check({name, " busy"}, d[0], 1'b1);
    wr(A_CTRL, {30'd0, bypass, 1'b1});     // ignored while busy
    do rd(A_STATUS, d); while (d[0]);
    check({name, " done"}, d[1], 1'b1);
    check({name, " err"}, d[2], !ok);
    if (ok) begin
      for (int i = 0; i < n_neurons(topo); i++) begin
        rd(A_NEURON + 14'(i), d);
        check($sformatf("%s neuron %0d", name, i), d, 32'(exp_out[i]));
      end
      rd(A_CYCLES, d);
      check({name, " cycles"}, d, 32'(ref_cycles(topo)));
    end
  endtask

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    #1 rst_n = 0; #1 rst_n = 1;
    for (int j = 0; j < 10; j++) codes[j] = tdc_code_t'($urandom);
    @(negedge clk);
    // register and memory read-back
    for (int j = 0; j < 10; j++) begin
      wr(A_BYPASS + 14'(j), 32'(j * 1000 + 7));
    end
    for (int j = 0; j < 10; j++) begin
      rd(A_BYPASS + 14'(j), d); check("bypass reg", d, 32'(j * 1000 + 7));
      rd(A_TDC + 14'(j), d);    check("tdc code", d, 32'(codes[j]));
    end
    wr(A_COEF + 14'd5, 32'h3FF);  rd(A_COEF + 14'd5, d);  check("coef sign", d, 32'hFFFF_FFFF);
    wr(A_COEF + 14'd6, 32'h1FF);  rd(A_COEF + 14'd6, d);  check("coef pos", d, 32'h1FF);
    wr(A_NEURON + 14'd9, 32'h1234_5678); rd(A_NEURON + 14'd9, d); check("neuron", d, 32'h1234_5678);
    wr(A_TOPO + 14'd3, 32'h55);   rd(A_TOPO + 14'd3, d);  check("topo", d, 32'h55);
    // paper's classification network, TDC inputs
    for (int i = 0; i < 78; i++) topo[i] = 0;
    topo[0] = 7; topo[1] = 10; for (int l = 2; l <= 6; l++) topo[l] = 13; topo[7] = 3;
    for (int i = 0; i < 1024; i++) coef[i] = int'($urandom_range(0, 320)) - 160;
    load_net();
    for (int j = 0; j < 10; j++) in_act[j] = longint'(codes[j][19:0]) * 256;
    run(1'b0, "tdc mode");
    // same network, stand-alone inputs
    for (int j = 0; j < 10; j++) begin
      in_act[j] = longint'($urandom_range(0, 40000)) - 8000;
      wr(A_BYPASS + 14'(j), 32'(in_act[j]));
    end
    run(1'b1, "bypass mode");
    rd(A_CTRL, d); check("ctrl bypass bit", d, 32'h2);
    // illegal topology
    topo[1] = 12;
    wr(A_TOPO + 14'd1, 32'd12);
    run(1'b1, "bad topology");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
