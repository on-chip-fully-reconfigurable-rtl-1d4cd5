// tb_tdc_vco: runs the ring-oscillator model for chosen enable widths and
// checks the frozen phase state (eight-state ring sequence), the number of Q<3>
// falling edges (one per eight stage delays), the EN_read gating of Q<0:2> and
// the reset state.
`timescale 1ns/1fs
module tb_tdc_vco;
  logic en = 0, en_read = 0, nrst = 0;
  logic [3:0] q;
  int checks = 0, failures = 0;
  int falls = 0;
  localparam realtime STAGE = 0.02675;

  tdc_vco dut (.en_i(en), .en_read_i(en_read), .nrst_i(nrst), .q_o(q));

  always @(negedge q[3]) falls++;

  function automatic logic [3:0] ring_state(int s);
    logic [3:0] r = '0;
    for (int i = 0; i < s % 8; i++) r = {r[2:0], ~r[3]};
    return r;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 nrst = 1;
    for (int t = 0; t < 40; t++) begin
      int steps;
      realtime width;
      steps = 1 + ($urandom % 200);
      width = STAGE * steps + STAGE / 2;   // stop half-way between two steps
      nrst = 0; #1; nrst = 1; #1;
      checks++;
      if (q !== 4'b0000) begin failures++; $display("FAIL reset state %b", q); end
      falls = 0;
      en_read = 0;
      en = 1; #(width); en = 0;
      #1;
      checks++;
      if (q[2:0] !== 3'b000) begin failures++; $display("FAIL Q<0:2> visible without EN_read"); end
      en_read = 1; #0.001;
      checks++;
      if (q !== ring_state(steps)) begin
        failures++; $display("FAIL steps=%0d q=%b exp %b", steps, q, ring_state(steps));
      end
      checks++;
      if (falls != steps / 8) begin failures++; $display("FAIL steps=%0d falls=%0d", steps, falls); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
