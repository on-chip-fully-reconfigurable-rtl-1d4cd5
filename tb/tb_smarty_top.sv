// tb_smarty_top: end-to-end test of the whole design at its default sizes.
// A host model drives the AXI4-Lite port with random back-pressure; pulse
// generators drive the TDC pads. Sequence: load the paper's 10-13x5-3
// classification network; measure ten staggered per-channel start pulses
// against a common stop and check every TDC code (interval / 53.5 ps) read
// over AXI; run the ANN on those codes and compare all 78 neuron outputs and
// the clock count with the reference model; repeat with TDC_START_ALL and
// with TDC_START_ELECTRIC (checking TDC_CNT_OUT); switch to the stand-alone
// bypass mode; run the wide-shallow 10-70-2 network; and load an illegal
// topology to see the error flag. Each mechanism is counted and a mechanism
// that never happened counts as a failure.
`timescale 1ns/1fs
module tb_smarty_top;
  import smarty_pkg::*;
  import tb_ref_pkg::*;
  localparam realtime STAGE = 0.02675;   // ring stage delay; one LSB = 2 stages

  logic clk = 0, nrst_all = 1;
  logic [15:0] awaddr = 0, araddr = 0;
  logic awvalid = 0, wvalid = 0, bready = 0, arvalid = 0, rready = 0;
  logic awready, wready, bvalid, arready, rvalid;
  logic [31:0] wdata = 0, rdata;
  logic [1:0] bresp, rresp;
  logic [9:0] spad = '0;
  logic stop = 0, tdc_nrst = 1, start_all = 0, start_el = 0;
  logic [3:0] cnt_sel = 0;
  logic cnt_out, ann_done;

  int topo [78];
  int coef [1024];
  longint in_act [10];
  int checks = 0, failures = 0;
  // mechanism counters
  int m_spad = 0, m_all = 0, m_elec = 0, m_mon = 0, m_tdc_run = 0, m_bypass_run = 0,
      m_err = 0, m_relu0 = 0, m_stall = 0;

  smarty_top dut (
    .clk, .nrst_all,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(4'hF), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .tdc_start_spad(spad), .tdc_stop_electric(stop), .tdc_nrst(tdc_nrst),
    .tdc_start_all(start_all), .tdc_start_electric(start_el), .tdc_cnt_sel(cnt_sel),
    .tdc_cnt_out(cnt_out), .ann_done_o(ann_done)
  );

  always #5 clk = ~clk;   // 100 MHz, the paper's operating clock
  always @(posedge clk) if (rvalid && !rready) m_stall++;

  // ---------------- host (AXI4-Lite master) ----------------
  task automatic axi_write(input logic [13:0] word, input logic [31:0] d);
    @(negedge clk);   // the TDC pulses leave the host off the clock grid
    awaddr = {word, 2'b00}; wdata = d; awvalid = 1; wvalid = 1;
    #1;
    while (!(awready && wready)) begin @(negedge clk); #1; end
    @(negedge clk); awvalid = 0; wvalid = 0;
    bready = 1;
    #1;
    while (!bvalid) begin @(negedge clk); #1; end
    @(negedge clk); bready = 0;
  endtask

  task automatic axi_read(input logic [13:0] word, output logic [31:0] d);
    @(negedge clk);
    araddr = {word, 2'b00}; arvalid = 1;
    #1;
    while (!arready) begin @(negedge clk); #1; end
    @(negedge clk); arvalid = 0;
    repeat ($urandom % 3) @(negedge clk);
    rready = 1;
    #1;
    while (!rvalid) begin @(negedge clk); #1; end
    d = rdata;
    @(negedge clk); rready = 0;
  endtask

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: %0d expected %0d", what, got, exp);
    end
  endtask

  // ---------------- TDC pads ----------------
  task automatic tdc_reset();
    tdc_nrst = 0; #2; tdc_nrst = 1; #2;
  endtask

  task automatic stop_pulse();
    stop = 1; #2; stop = 0; #2;
  endtask

  task automatic read_codes(input int exp_steps [10], string name);
    logic [31:0] d;
    for (int j = 0; j < 10; j++) begin
      axi_read(A_TDC + 14'(j), d);
      check($sformatf("%s TDC%0d code", name, j), d, 32'(exp_steps[j] / 2));
      in_act[j] = longint'(d[19:0]) * 256;
    end
  endtask

  // ---------------- ANN ----------------
  task automatic load_net();
    for (int i = 0; i < 78; i++) axi_write(A_TOPO + 14'(i), 32'(topo[i]));
    for (int i = 0; i < n_coefs(topo); i++) axi_write(A_COEF + 14'(i), 32'(coef[i]));
  endtask

  task automatic run_ann(input bit bypass, string name);
    longint exp_out [128];
    logic [31:0] d;
    bit ok;
    ok = ref_net(topo, coef, in_act, exp_out);
    axi_write(A_CTRL, {30'd0, bypass, 1'b1});
    do axi_read(A_STATUS, d); while (d[0]);
    check({name, " done"}, d[1], 1'b1);
    check({name, " error flag"}, d[2], !ok);
    if (!ok && d[2]) m_err++;
    if (ok) begin
      for (int i = 0; i < n_neurons(topo); i++) begin
        axi_read(A_NEURON + 14'(i), d);
        check($sformatf("%s neuron %0d", name, i), d, 32'(exp_out[i]));
        if (exp_out[i] == 0) m_relu0++;
      end
      axi_read(A_CYCLES, d);
      check({name, " cycles"}, d, 32'(ref_cycles(topo)));
      $display("%s: %0d clocks = %0.2f us at 100 MHz", name, d, d * 0.01);
      if (bypass) m_bypass_run++; else m_tdc_run++;
    end
  endtask

  task automatic set_topo(input int sizes [$]);
    for (int i = 0; i < 78; i++) topo[i] = 0;
    topo[0] = sizes.size();
    foreach (sizes[i]) topo[i+1] = sizes[i];
  endtask

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int steps [10];
    logic [31:0] d;
    #1 nrst_all = 0; #3 nrst_all = 1;
    @(negedge clk);

    // classification network of the coincidence experiment
    set_topo('{10, 13, 13, 13, 13, 13, 3});
    for (int i = 0; i < 1024; i++) coef[i] = int'($urandom_range(0, 320)) - 160;
    load_net();
    for (int i = 0; i < 6; i++) begin
      axi_read(A_COEF + 14'(i * 97), d);
      check("coefficient read-back", d, 32'(coef[i * 97]));
    end

    // (1) per-channel starts (photodetector mode), common stop
    tdc_reset();
    for (int j = 0; j < 10; j++) steps[j] = 400 + int'($urandom_range(0, 3000));
    fork
      for (int j = 0; j < 10; j++) begin
        automatic int jj = j;
        fork
          begin
            #(STAGE * (4000 - steps[jj]) + 0.1);
            spad[jj] = 1; #0.01; spad[jj] = 0;
          end
        join_none
      end
    join
    #(STAGE * 4000.5 + 0.1);
    stop_pulse();
    m_spad++;
    read_codes(steps, "spad");
    run_ann(1'b0, "10-13x5-3 on TDC codes");

    // (2) TDC_START_ALL: all channels measure the same interval
    tdc_reset();
    start_all = 1; #0.01; start_all = 0;
    #(STAGE * 2345.5 - 0.01);
    stop_pulse();
    m_all++;
    for (int j = 0; j < 10; j++) steps[j] = 2345;
    read_codes(steps, "start-all");
    run_ann(1'b0, "10-13x5-3 on equal codes");

    // (3) TDC_START_ELECTRIC into channel 7, monitor its counter bit
    tdc_reset();
    cnt_sel = 4'd7;
    start_el = 1; #0.01; start_el = 0;
    #(STAGE * 1700.5 - 0.01);
    stop_pulse();
    m_elec++;
    for (int j = 0; j < 10; j++) steps[j] = (j == 7) ? 1700 : 0;
    read_codes(steps, "start-electric");
    checks++;
    if (cnt_out !== 1'((1700 / 8) >> 6)) begin failures++; $display("FAIL TDC_CNT_OUT"); end
    else m_mon++;

    // (4) stand-alone mode: inputs written over the bus
    for (int j = 0; j < 10; j++) begin
      in_act[j] = longint'($urandom_range(0, 60000)) - 10000;
      axi_write(A_BYPASS + 14'(j), 32'(in_act[j]));
    end
    run_ann(1'b1, "10-13x5-3 stand-alone");

    // (5) wide-shallow network of the simulation study, bypass inputs
    set_topo('{10, 70, 2});
    for (int i = 0; i < 1024; i++) coef[i] = int'($urandom_range(0, 200)) - 100;
    load_net();
    run_ann(1'b1, "10-70-2 stand-alone");

    // (6) illegal topology: 130 neurons
    set_topo('{10, 60, 60});
    for (int i = 0; i < 4; i++) axi_write(A_TOPO + 14'(i), 32'(topo[i]));
    run_ann(1'b1, "130 neurons");

    $display("mechanisms: spad=%0d start_all=%0d start_electric=%0d cnt_monitor=%0d tdc_runs=%0d bypass_runs=%0d topo_error=%0d relu_zero=%0d axi_stall=%0d",
             m_spad, m_all, m_elec, m_mon, m_tdc_run, m_bypass_run, m_err, m_relu0, m_stall);
    checks++; if (m_spad == 0 || m_all == 0 || m_elec == 0) begin failures++; $display("FAIL a TDC start mode never ran"); end
    checks++; if (m_mon == 0) begin failures++; $display("FAIL monitor output never checked"); end
    checks++; if (m_tdc_run == 0 || m_bypass_run == 0) begin failures++; $display("FAIL an input mode never ran"); end
    checks++; if (m_err == 0) begin failures++; $display("FAIL topology error never seen"); end
    checks++; if (m_relu0 == 0) begin failures++; $display("FAIL ReLU clamp never seen"); end
    checks++; if (m_stall == 0) begin failures++; $display("FAIL AXI read back-pressure never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
