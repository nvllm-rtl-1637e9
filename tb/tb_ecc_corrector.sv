// tb_ecc_corrector -- one corrector: single data-bit errors must be
// repaired (changed = 1), check-bit errors leave the data (changed = 0),
// two errors in one row are flagged uncorrectable. The latency from
// acceptance to a valid result must be SUB_N + 1 = 5 cycles (load, then one row per cycle).
module tb_ecc_corrector;
  import nv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, in_ready, out_valid, out_ready, out_changed, out_uncorr;
  seg_t in_data, out_data; par_t in_par; logic [7:0] in_tag, out_tag;
  ecc_corrector dut (.*);
  initial begin
    in_valid = 0; out_ready = 0; in_data = 0; in_par = 0; in_tag = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int n = 0; n < 600; n++) begin
      seg_t clean, d; par_t p; int kind, b, row, lat;
      for (int j = 0; j < 4; j++) clean[j*32 +: 32] = $urandom;
      d = clean; p = seg_encode(clean);
      kind = n % 4;   // 0 data error, 1 check-bit error, 2 double in a row, 3 one error in each row
      row = $urandom % SUB_N;
      b = $urandom % SUB_W;
      case (kind)
        0: d[row*SUB_W + b] = ~d[row*SUB_W + b];
        1: p[row*SUB_PW + (b % SUB_PW)] = ~p[row*SUB_PW + (b % SUB_PW)];
        2: begin d[row*SUB_W + b] = ~d[row*SUB_W + b]; d[row*SUB_W + (b+5)%SUB_W] = ~d[row*SUB_W + (b+5)%SUB_W]; end
        default: for (int r = 0; r < SUB_N; r++) d[r*SUB_W + (b+r)%SUB_W] = ~d[r*SUB_W + (b+r)%SUB_W];
      endcase
      while (!in_ready) @(posedge clk);
      in_valid <= 1; in_data <= d; in_par <= p; in_tag <= 8'(n);
      @(posedge clk); in_valid <= 0;
      lat = 0;
      while (!out_valid) begin @(posedge clk); lat++; end
      checks++;
      if (lat != SUB_N + 1) begin failures++; $display("FAIL: latency %0d", lat); end
      checks++;
      if (out_tag != 8'(n)) begin failures++; $display("FAIL: tag"); end
      checks++;
      case (kind)
        0, 3: if (out_data != clean || !out_changed || out_uncorr) begin failures++; $display("FAIL: kind %0d not corrected", kind); end
        1: if (out_data != clean || out_changed || out_uncorr) begin failures++; $display("FAIL: check-bit error handled wrong"); end
        default: if (!out_uncorr) begin failures++; $display("FAIL: double error not flagged"); end
      endcase
      out_ready <= 1; @(posedge clk); out_ready <= 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
