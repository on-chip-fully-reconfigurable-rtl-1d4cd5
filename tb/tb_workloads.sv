// tb_workloads: runs the network topologies evaluated in the paper on the ANN
// block with TDC codes as inputs: the 10-8x4-6 fixed-point study (TDC codes
// drawn from the four ranges 0-300000, 300000-600000, 600000-900000 and
// 900000-1000000), the 5-13x5-1 optical regression net, the 10-13x5-2 and
// 10-70-2 coincidence nets and the 10-13x5-3 / 10-13x5-4 classifiers. Every
// neuron output is compared exactly with the integer reference model, the
// clock count with the schedule, and the outputs with a floating-point
// evaluation of the same network. For the fixed-point study the relative
// error of outputs above 100 must stay below 0.03 %, the bound quoted for
// 8 fractional bits; for the others the worst error is only reported.
`timescale 1ns/1fs
module tb_workloads;
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
  real worst_rel = 0.0;

  ann dut (.clk, .rst_n, .ram_addr_i(addr), .ram_wdata_i(wdata), .ram_we_i(we), .ram_rce_i(rce),
           .ram_rdata_o(rdata), .tdc_codes_i(codes), .busy_o(busy), .done_o(done));

  always #5 clk = ~clk;

  task automatic wr(input logic [13:0] a, input logic [31:0] d);
    addr = a; wdata = d; we = 1; @(negedge clk); we = 0;
  endtask

  task automatic rd(input logic [13:0] a, output logic [31:0] d);
    addr = a; rce = 1; @(negedge clk); rce = 0; d = rdata;
  endtask

  // floating-point model of the same network (no truncation, no saturation)
  function automatic void float_net(output real out [128]);
    int base, prev_base, prev_n, ci, n, f;
    real acc;
    base = 0; prev_base = 0; prev_n = 0; ci = 0;
    for (int i = 0; i < 128; i++) out[i] = 0.0;
    for (int l = 0; l < topo[0]; l++) begin
      n = topo[l+1];
      f = (l == 0) ? 1 : prev_n;
      for (int j = 0; j < n; j++) begin
        acc = real'(coef[ci]) / 256.0; ci++;
        for (int k = 0; k < f; k++) begin
          real a;
          a = (l == 0) ? real'(in_act[j]) / 256.0 : out[prev_base + k];
          acc += a * real'(coef[ci]) / 256.0; ci++;
        end
        out[base + j] = (acc < 0.0) ? 0.0 : acc;
      end
      prev_base = base; base += n; prev_n = n;
    end
  endfunction

  task automatic run_workload(string name, int sizes [$], int lo, int hi, bit rel_check);
    longint exp_out [128];
    real fl [128];
    logic [31:0] d;
    bit ok;
    int n;
    for (int i = 0; i < 78; i++) topo[i] = 0;
    topo[0] = sizes.size();
    foreach (sizes[i]) topo[i+1] = sizes[i];
    // weights +-0.25 keep these deep nets inside the 32-bit range
    for (int i = 0; i < 1024; i++) coef[i] = int'($urandom_range(0, 128)) - 64;
    for (int i = 0; i < 78; i++) wr(A_TOPO + 14'(i), 32'(topo[i]));
    for (int i = 0; i < n_coefs(topo); i++) wr(A_COEF + 14'(i), 32'(coef[i]));
    for (int j = 0; j < 10; j++) begin
      codes[j] = tdc_code_t'($urandom_range(lo, hi));
      in_act[j] = longint'(codes[j][19:0]) * 256;
    end
    ok = ref_net(topo, coef, in_act, exp_out);
    float_net(fl);
    wr(A_CTRL, 32'h1);
    do rd(A_STATUS, d); while (d[0]);
    checks++;
    if (!ok || d[2]) begin failures++; $display("FAIL %s rejected", name); end
    n = n_neurons(topo);
    for (int i = 0; i < n; i++) begin
      rd(A_NEURON + 14'(i), d);
      checks++;
      if (d !== 32'(exp_out[i])) begin
        failures++;
        if (failures < 20) $display("FAIL %s neuron %0d: %0d expected %0d", name, i, d, exp_out[i]);
      end
      if (fl[i] > 100.0 && fl[i] < 8.0e6) begin
        real rel;
        rel = (real'(signed'(d)) / 256.0 - fl[i]) / fl[i];
        if (rel < 0) rel = -rel;
        if (rel > worst_rel) worst_rel = rel;
        checks++;
        if (rel_check && rel > 3.0e-4) begin failures++; $display("FAIL %s neuron %0d relative error %g", name, i, rel); end
      end
    end
    rd(A_CYCLES, d);
    checks++;
    if (d !== 32'(ref_cycles(topo))) begin failures++; $display("FAIL %s cycles %0d", name, d); end
    $display("%s: %0d neurons %0d coefficients, %0d clocks (%0.2f us at 100 MHz)",
             name, n, n_coefs(topo), d, d * 0.01);
  endtask

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 0; #1 rst_n = 1;
    @(negedge clk);
    run_workload("fixed-point study, range 0", '{10, 8, 8, 8, 8, 6}, 0, 300000, 1'b1);
    run_workload("fixed-point study, range 1", '{10, 8, 8, 8, 8, 6}, 300000, 600000, 1'b1);
    run_workload("fixed-point study, range 2", '{10, 8, 8, 8, 8, 6}, 600000, 900000, 1'b1);
    run_workload("fixed-point study, range 3", '{10, 8, 8, 8, 8, 6}, 900000, 1000000, 1'b1);
    run_workload("optical 5-13x5-1", '{5, 13, 13, 13, 13, 13, 1}, 0, 4000, 1'b0);
    run_workload("narrow-deep 10-13x5-2", '{10, 13, 13, 13, 13, 13, 2}, 0, 8000, 1'b0);
    run_workload("wide-shallow 10-70-2", '{10, 70, 2}, 0, 8000, 1'b0);
    run_workload("classifier 10-13x5-3", '{10, 13, 13, 13, 13, 13, 3}, 0, 8000, 1'b0);
    run_workload("classifier 10-13x5-4", '{10, 13, 13, 13, 13, 13, 4}, 0, 8000, 1'b0);
    $display("worst relative error against floating point: %g", worst_rel);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
