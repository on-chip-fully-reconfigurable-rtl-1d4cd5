// tb_tdc_therm_decoder: applies the eight ring states in order and checks that
// the decoded state index p gives B1:B0 = p/2 and B2 = p mod 2.
`timescale 1ns/1fs
module tb_tdc_therm_decoder;
  logic [3:0] q;
  logic [2:0] b;
  int checks = 0, failures = 0;
  // ring states in order, bit 0 = Q<0>
  logic [3:0] states [8] = '{4'b0000, 4'b0001, 4'b0011, 4'b0111, 4'b1111, 4'b1110, 4'b1100, 4'b1000};

  tdc_therm_decoder dut (.q_i(q), .b_o(b));

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < 8; p++) begin
      q = states[p];
      #1;
      checks++;
      if (b[1:0] !== 2'(p / 2) || b[2] !== 1'(p % 2)) begin
        failures++;
        $display("FAIL state %b: B=%b, expected fine %0d half %0d", q, b, p / 2, p % 2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
