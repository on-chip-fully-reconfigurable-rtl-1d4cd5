// tb_tdc_bank: exercises the three start modes of the ten-TDC bank and the
// monitor multiplexer. (1) TDC_START_ALL then TDC_STOP_ELECTRIC: every TDC
// measures the same interval. (2) per-channel starts at different times: each
// code matches its own interval. (3) TDC_START_ELECTRIC with TDC_CNT_SEL = j:
// only TDC j runs. TDC_CNT_OUT must equal counter bit 6 of the selected TDC.
`timescale 1ns/1fs
module tb_tdc_bank;
  import smarty_pkg::*;
  logic [9:0] spad = '0;
  logic stop = 0, nrst = 1, all = 0, elec = 0;
  logic [3:0] sel = 0;
  logic cnt_out;
  tdc_code_t codes [10];
  logic [9:0] b2;
  int checks = 0, failures = 0;
  localparam realtime STAGE = 0.02675;

  tdc_bank dut (
    .tdc_start_spad_i(spad), .tdc_stop_electric_i(stop), .tdc_nrst_i(nrst),
    .tdc_start_all_i(all), .tdc_start_electric_i(elec), .tdc_cnt_sel_i(sel),
    .tdc_cnt_out_o(cnt_out), .codes_o(codes), .b2_o(b2)
  );

  task automatic reset_tdcs();
    nrst = 0; #1; nrst = 1; #1;
  endtask

  task automatic stop_pulse();
    stop = 1; #1; stop = 0; #1;
  endtask

  task automatic expect_code(int j, int steps);
    checks++;
    if (codes[j] !== 22'(steps / 2)) begin
      failures++;
      $display("FAIL TDC%0d code %0d expected %0d", j, codes[j], steps / 2);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int steps [10];
    // (1) start all
    reset_tdcs();
    all = 1; #0.01; all = 0;
    #(STAGE * 1001.5 - 0.01);
    stop_pulse();
    for (int j = 0; j < 10; j++) expect_code(j, 1001);
    // monitor multiplexer
    for (int s = 0; s < 16; s++) begin
      sel = 4'(s); #0.1;
      checks++;
      if (cnt_out !== ((s < 10) ? codes[s][8] : 1'b0)) begin
        failures++; $display("FAIL cnt_out sel=%0d", s);
      end
    end
    // (2) per-channel starts, staggered
    reset_tdcs();
    for (int j = 0; j < 10; j++) steps[j] = 3000 - 137 * j;
    fork
      for (int j = 0; j < 10; j++) begin
        automatic int jj = j;
        fork
          begin
            #(STAGE * (3000 - steps[jj]) + 0.1);
            spad[jj] = 1; #0.01; spad[jj] = 0;
          end
        join_none
      end
    join
    #(STAGE * 3000.5 + 0.1);
    stop_pulse();
    for (int j = 0; j < 10; j++) expect_code(j, steps[j]);
    // (3) electrical start of one channel at a time
    for (int j = 0; j < 10; j++) begin
      reset_tdcs();
      sel = 4'(j);
      elec = 1; #0.01; elec = 0;
      #(STAGE * (200.5 + 10 * j) - 0.01);
      stop_pulse();
      for (int i = 0; i < 10; i++) expect_code(i, (i == j) ? 200 + 10 * j : 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
