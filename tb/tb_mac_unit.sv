// tb_mac_unit -- random INT8 segments against a reference dot product;
// checks the bias enters only on the last segment and the data mask.
module tb_mac_unit;
  import nv_pkg::*;
  int checks = 0, failures = 0;
  seg_t w, a; logic mask, last; acc_t bias, sum;
  mac_unit dut (.w_i(w), .a_i(a), .mask_i(mask), .last_i(last), .bias_i(bias), .sum_o(sum));
  initial begin
    for (int n = 0; n < 2000; n++) begin
      acc_t exp;
      for (int j = 0; j < 4; j++) begin w[j*32 +: 32] = $urandom; a[j*32 +: 32] = $urandom; end
      if (n < 4) begin w = {D{8'h80}}; a = {D{8'h80}}; end   // extreme: -128 * -128
      mask = ($urandom % 4) == 0; last = ($urandom % 2) == 0;
      bias = $urandom;
      #1;
      exp = 0;
      if (!mask) for (int i = 0; i < D; i++) exp += $signed(w[i*8 +: 8]) * $signed(a[i*8 +: 8]);
      if (last) exp += bias;
      checks++;
      if (sum !== exp) begin failures++; if (failures < 5) $display("FAIL: sum %0d exp %0d", sum, exp); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
