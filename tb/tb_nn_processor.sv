// tb_nn_processor: random bias loads and multiply-accumulate steps, including
// large values that saturate, compared with a 64-bit integer reference
// (floor(act*coef/256), clamp to 32 bits, ReLU on the output).
`timescale 1ns/1fs
module tb_nn_processor;
  import smarty_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 1, load = 0, mac = 0;
  coef_t coef = '0;
  act_t  act = '0, y;
  longint acc_ref;
  int checks = 0, failures = 0, n_sat = 0;

  nn_processor dut (.clk, .rst_n, .load_bias_i(load), .mac_i(mac), .coef_i(coef), .act_i(act), .y_o(y));

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 0; #1 rst_n = 1;
    acc_ref = 0;
    @(negedge clk);
    for (int t = 0; t < 20000; t++) begin
      int r;
      r = $urandom % 10;
      load = (r == 0);
      mac  = (r > 1);
      coef = coef_t'($urandom);
      case ($urandom % 3)
        0: act = act_t'($urandom % 65536);
        1: act = act_t'($urandom);
        default: act = act_t'(-($urandom % 4096));
      endcase
      if (load)     acc_ref = longint'(coef);
      else if (mac) begin
        acc_ref = acc_ref + floor_div256(longint'(act) * longint'(coef));
        if (acc_ref != clamp32(acc_ref)) n_sat++;
        acc_ref = clamp32(acc_ref);
      end
      @(negedge clk);
      checks++;
      if (y !== act_t'((acc_ref < 0) ? 0 : acc_ref)) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d y=%0d exp %0d", t, y, acc_ref);
      end
    end
    load = 0; mac = 0;
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
