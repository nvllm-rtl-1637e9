// tb_corrector_hub -- eight correctors behind one port. A burst of eight
// requests must be accepted back to back, one per cycle; every result must come back once with the
// corrected data of its tag. Then random traffic.
module tb_corrector_hub;
  import nv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic req_valid, req_ready, res_valid, res_changed, res_uncorr;
  seg_t req_data, res_data; par_t req_par; logic [2:0] req_tag, res_tag;
  corrector_hub #(.NCORR(8), .TAG_W(3)) dut (.*);
  seg_t clean [8];
  logic outstanding [8];
  int nres = 0;
  always @(posedge clk) if (rst_n && res_valid) begin
    checks++;
    if (!outstanding[res_tag] || res_data != clean[res_tag] || !res_changed) begin
      failures++; $display("FAIL: result tag %0d out=%0d eq=%0d ch=%0d unc=%0d t=%0t", res_tag, outstanding[res_tag], res_data == clean[res_tag], res_changed, res_uncorr, $time); end
    outstanding[res_tag] = 0;
    nres++;
  end
  // present one request at a negedge when the hub is ready; it is taken at
  // the next posedge
  task automatic send(input int t, input logic [SEG_W-1:0] flip);
    @(negedge clk);
    while (!req_ready) begin req_valid = 0; @(negedge clk); end
    for (int j = 0; j < 4; j++) clean[t][j*32 +: 32] = $urandom;
    req_valid = 1; req_data = clean[t] ^ flip; req_par = seg_encode(clean[t]); req_tag = 3'(t);
    outstanding[t] = 1;
  endtask
  initial begin
    int t0;
    req_valid = 0; req_data = 0; req_par = 0; req_tag = 0;
    for (int i = 0; i < 8; i++) outstanding[i] = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    // burst of 8 back to back: must take 8 cycles
    t0 = $time;
    for (int t = 0; t < 8; t++) send(t, seg_t'(1) << (t * 13));
    @(negedge clk); req_valid = 0;
    checks++; if (($time - t0) / 10 > 9) begin failures++; $display("FAIL: burst took %0d cycles", ($time - t0) / 10); end
    while (nres < 8) @(posedge clk);
    // random traffic, tags reused only when free
    for (int n = 0; n < 300; n++) begin
      int t; t = $urandom % 8;
      if (!outstanding[t]) send(t, seg_t'(1) << ($urandom % SEG_W));
      else begin @(negedge clk); req_valid = 0; end
    end
    @(negedge clk); req_valid = 0;
    repeat (50) @(posedge clk);
    for (int i = 0; i < 8; i++) begin checks++; if (outstanding[i]) begin failures++; $display("FAIL: tag %0d lost", i); end end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
