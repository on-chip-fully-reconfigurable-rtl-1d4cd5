// tb_tdc: measures random START-to-STOP intervals with one TDC and checks the
// 22-bit code against the interval divided by the LSB (two stage delays,
// 53.5 ps): code = floor(steps/2) where steps = floor(interval/stage delay).
// Also checks that EN_read exposes the fine bits, the monitor bit (counter
// bit 6) and reset.
`timescale 1ns/1fs
module tb_tdc;
  logic start = 0, stop = 0, nrst = 1;
  logic [21:0] code;
  logic b2, mon;
  int checks = 0, failures = 0;
  localparam realtime STAGE = 0.02675;

  tdc dut (.start_i(start), .stop_i(stop), .nrst_i(nrst), .code_o(code), .b2_o(b2), .cnt_mon_o(mon));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 40; t++) begin
      int steps;
      steps = (t < 20) ? 1 + ($urandom % 64) : 1 + ($urandom % 20000);
      nrst = 0; #1; nrst = 1; #1;
      start = 1; #0.01; start = 0;
      #(STAGE * steps + STAGE / 2 - 0.01);
      stop = 1; #1; stop = 0; #1;
      checks++;
      if (code !== 22'(steps / 2) || b2 !== 1'(steps % 2)) begin
        failures++;
        $display("FAIL steps=%0d code=%0d (exp %0d) b2=%0b", steps, code, steps / 2, b2);
      end
      checks++;
      if (mon !== code[2 + 6]) begin failures++; $display("FAIL monitor bit"); end
    end
    nrst = 0; #1;
    checks++;
    if (code !== 0) begin failures++; $display("FAIL reset code %0d", code); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
