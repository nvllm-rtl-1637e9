// tb_ecc_checker -- random segments with 0, 1 or 2 flipped bits anywhere in
// data or check bits; the detector must flag exactly the corrupted ones.
module tb_ecc_checker;
  import nv_pkg::*;
  int checks = 0, failures = 0;
  seg_t d; par_t p; logic err;
  ecc_checker dut (.data_i(d), .par_i(p), .err_o(err));
  initial begin
    for (int n = 0; n < 3000; n++) begin
      logic [SEG_W+PAR_W-1:0] v;
      int nf, b0, b1;
      for (int j = 0; j < 4; j++) d[j*32 +: 32] = $urandom;
      p = seg_encode(d);
      v = {d, p};
      nf = n % 3;
      b0 = $urandom % (SEG_W + PAR_W);
      b1 = (b0 + 1 + ($urandom % (SEG_W + PAR_W - 1))) % (SEG_W + PAR_W);
      if (nf >= 1) v[b0] = ~v[b0];
      if (nf >= 2) v[b1] = ~v[b1];
      {d, p} = v;
      #1;
      checks++;
      if (err != (nf != 0)) begin
        failures++;
        if (failures < 5) $display("FAIL: flips=%0d bits %0d %0d err=%0d", nf, b0, b1, err);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
