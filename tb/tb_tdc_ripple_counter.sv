// tb_tdc_ripple_counter: applies random numbers of clock pulses (counted on
// the falling edge) to the 20-bit ripple counter and checks the count, the
// wrap-around at 2^20 and the asynchronous reset.
`timescale 1ns/1fs
module tb_tdc_ripple_counter;
  logic clk = 1, nrst = 1;
  logic [19:0] q;
  int checks = 0, failures = 0;

  tdc_ripple_counter #(.WIDTH(20)) dut (.nclk_i(clk), .nrst_i(nrst), .q_o(q));

  task automatic pulses(int n);
    repeat (n) begin #0.2 clk = 0; #0.2 clk = 1; end
    #1;
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    logic [19:0] exp_q;
    #1 nrst = 0; #1 nrst = 1;
    exp_q = 0;
    for (int t = 0; t < 30; t++) begin
      n = $urandom % 300;
      pulses(n);
      exp_q += 20'(n);
      checks++;
      if (q !== exp_q) begin failures++; $display("FAIL count %0d exp %0d", q, exp_q); end
    end
    // reset, then count to the top and wrap
    nrst = 0; #1;
    checks++;
    if (q !== 0) begin failures++; $display("FAIL reset"); end
    nrst = 1; #1;
    // rising edge of the clock must not count
    clk = 0; #1;
    checks++;
    if (q !== 1) begin failures++; $display("FAIL first falling edge not counted: %0d", q); end
    clk = 1; #1;
    checks++;
    if (q !== 1) begin failures++; $display("FAIL rising edge counted: %0d", q); end
    pulses((1 << 20) - 1);
    checks++;
    if (q !== 0) begin failures++; $display("FAIL wrap %0d", q); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
