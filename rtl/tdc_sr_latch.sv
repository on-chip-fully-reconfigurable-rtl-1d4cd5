// tdc_sr_latch: the START/STOP set-reset latch at the front of each TDC.
// START (S) sets EN, which lets the ring oscillator run; STOP (R) clears EN and
// sets EN_read, which opens the phase output buffers so the frozen state can be
// read. A new START clears EN_read again. TDC_nRST (active low) clears both.
// Both outputs are level-sensitive latches, as the SR symbol in the paper's TDC
// diagram suggests; when S and R are high together, reset wins (own choice).
// The circuit is asynchronous: there is no clock, the latch follows its inputs.
`timescale 1ns/1fs
module tdc_sr_latch (
  input  logic start_i,   // S
  input  logic stop_i,    // R
  input  logic nrst_i,    // active-low reset
  output logic en_o,      // EN
  output logic en_read_o  // EN_read
);
  always_latch begin
    if (!nrst_i)       en_o = 1'b0;
    else if (stop_i)   en_o = 1'b0;
    else if (start_i)  en_o = 1'b1;
  end

  always_latch begin
    if (!nrst_i)       en_read_o = 1'b0;
    else if (stop_i)   en_read_o = 1'b1;
    else if (start_i)  en_read_o = 1'b0;
  end
endmodule
