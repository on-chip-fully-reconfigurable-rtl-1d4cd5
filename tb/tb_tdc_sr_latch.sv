// tb_tdc_sr_latch: drives START/STOP/nRST sequences into the TDC front latch
// and compares EN and EN_read with the expected set/reset behaviour after
// every step, including random sequences checked against a simple model.
`timescale 1ns/1fs
module tb_tdc_sr_latch;
  logic start, stop, nrst, en, en_read;
  int checks = 0, failures = 0;
  logic m_en, m_rd;

  tdc_sr_latch dut (.start_i(start), .stop_i(stop), .nrst_i(nrst), .en_o(en), .en_read_o(en_read));

  task automatic step(input logic s, input logic r, input logic n);
    start = s; stop = r; nrst = n;
    #1;
    if (!n)      begin m_en = 0; m_rd = 0; end
    else if (r)  begin m_en = 0; m_rd = 1; end
    else if (s)  begin m_en = 1; m_rd = 0; end
    checks++;
    if (en !== m_en || en_read !== m_rd) begin
      failures++;
      $display("FAIL s=%0b r=%0b n=%0b: en=%0b (exp %0b) en_read=%0b (exp %0b)", s, r, n, en, m_en, en_read, m_rd);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    step(0, 0, 0);
    step(0, 0, 1);
    // the measurement of the paper's timing diagram: START pulse, later STOP pulse
    step(1, 0, 1); step(0, 0, 1);
    if (en !== 1'b1) begin failures++; $display("FAIL EN not held after START"); end
    checks++;
    step(0, 1, 1); step(0, 0, 1);
    if (en !== 1'b0 || en_read !== 1'b1) begin failures++; $display("FAIL after STOP"); end
    checks++;
    step(1, 0, 1);
    step(0, 0, 0);
    repeat (400) step(1'($urandom), 1'($urandom), ($urandom % 8) != 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
