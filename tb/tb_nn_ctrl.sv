// tb_nn_ctrl: the controller with the four real processors and testbench
// models of the three memories (one-clock read latency) and of the input
// multiplexer. For random topologies, the paper's two coincidence topologies
// and some illegal ones it checks every neuron output against the reference
// model, the clock count against the schedule formula, and the error flag.
`timescale 1ns/1fs
module tb_nn_ctrl;
  import smarty_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 1, start = 0;
  logic busy, done, err;
  logic [31:0] cycles;
  logic topo_en, coef_en, nm_en, nm_we;
  logic [6:0] topo_addr, nm_addr;
  logic [9:0] coef_addr;
  logic [7:0] topo_q;
  coef_t coef_q;
  act_t nm_wdata, nm_q, in_val, p_act;
  coef_t p_coef;
  logic [3:0] in_sel;
  logic [3:0] p_load, p_mac;
  act_t p_y [4];

  int topo [78];
  int coef [1024];
  longint in_act [10];
  act_t nm [128];
  int checks = 0, failures = 0;

  nn_ctrl dut (
    .clk, .rst_n, .start_i(start), .busy_o(busy), .done_o(done), .err_o(err), .cycles_o(cycles),
    .topo_en_o(topo_en), .topo_addr_o(topo_addr), .topo_rdata_i(topo_q),
    .coef_en_o(coef_en), .coef_addr_o(coef_addr), .coef_rdata_i(coef_q),
    .nm_en_o(nm_en), .nm_we_o(nm_we), .nm_addr_o(nm_addr), .nm_wdata_o(nm_wdata), .nm_rdata_i(nm_q),
    .in_sel_o(in_sel), .in_val_i(in_val),
    .proc_load_o(p_load), .proc_mac_o(p_mac), .proc_coef_o(p_coef), .proc_act_o(p_act), .proc_y_i(p_y)
  );

  for (genvar g = 0; g < 4; g++) begin : g_p
    nn_processor u_p (.clk, .rst_n, .load_bias_i(p_load[g]), .mac_i(p_mac[g]), .coef_i(p_coef), .act_i(p_act), .y_o(p_y[g]));
  end

  always_ff @(posedge clk) begin
    if (topo_en) topo_q <= 8'(topo[topo_addr]);
    if (coef_en) coef_q <= coef_t'(coef[coef_addr]);
    if (nm_en) begin
      if (nm_we) nm[nm_addr] <= nm_wdata;
      else       nm_q        <= nm[nm_addr];
    end
  end
  assign in_val = (in_sel < 10) ? act_t'(in_act[in_sel]) : '0;

  always #5 clk = ~clk;

  task automatic run_and_check(string name);
    longint exp_out [128];
    bit ok;
    int n;
    for (int i = 0; i < 128; i++) nm[i] = act_t'(32'hDEAD_BEEF);
    ok = ref_net(topo, coef, in_act, exp_out);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);   // CYCLES counts the final clock too
    checks++;
    if (err !== !ok) begin failures++; $display("FAIL %s: err=%0b expected %0b", name, err, !ok); end
    if (ok) begin
      n = n_neurons(topo);
      for (int i = 0; i < n; i++) begin
        checks++;
        if (nm[i] !== act_t'(exp_out[i])) begin
          failures++;
          if (failures < 20) $display("FAIL %s: neuron %0d = %0d expected %0d", name, i, nm[i], exp_out[i]);
        end
      end
      checks++;
      if (cycles !== 32'(ref_cycles(topo))) begin
        failures++; $display("FAIL %s: %0d cycles, expected %0d", name, cycles, ref_cycles(topo));
      end
    end
  endtask

  task automatic random_data();
    for (int i = 0; i < 1024; i++) coef[i] = int'($urandom_range(0, 320)) - 160;
    for (int j = 0; j < 10; j++) in_act[j] = longint'($urandom_range(0, 1000000)) * 256;
  endtask

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 0; #1 rst_n = 1;
    for (int i = 0; i < 78; i++) topo[i] = 0;
    // paper: 10 inputs, 5 hidden layers of 13, 3 outputs (classification net)
    topo[0] = 7; topo[1] = 10; for (int l = 2; l <= 6; l++) topo[l] = 13; topo[7] = 3;
    random_data();
    run_and_check("narrow-deep 10-13x5-3");
    $display("narrow-deep 10-13x5-3: %0d clocks", cycles);
    // paper: wide-shallow 10-70-2
    for (int i = 0; i < 78; i++) topo[i] = 0;
    topo[0] = 3; topo[1] = 10; topo[2] = 70; topo[3] = 2;
    random_data();
    run_and_check("wide-shallow 10-70-2");
    // random legal topologies
    for (int t = 0; t < 25; t++) begin
      do begin
        for (int i = 0; i < 78; i++) topo[i] = 0;
        topo[0] = $urandom_range(1, 6);
        topo[1] = $urandom_range(1, 10);
        for (int l = 2; l <= topo[0]; l++) topo[l] = $urandom_range(1, 16);
      end while (n_neurons(topo) > 128 || n_coefs(topo) > 1024);
      random_data();
      run_and_check($sformatf("random %0d", t));
    end
    // illegal topologies: too many inputs, zero layer, too many coefficients, no layers
    for (int i = 0; i < 78; i++) topo[i] = 0;
    topo[0] = 2; topo[1] = 11; topo[2] = 2;  run_and_check("11 inputs");
    topo[1] = 5; topo[2] = 0;                 run_and_check("empty layer");
    topo[0] = 3; topo[2] = 40; topo[3] = 40;  run_and_check("too many coefficients");
    topo[0] = 0;                              run_and_check("no layers");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
