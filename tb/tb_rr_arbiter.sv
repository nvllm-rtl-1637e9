// tb_rr_arbiter -- grants must be one-hot, among requesters, and rotate:
// with all eight requesting and every grant taken, each requester gets
// exactly one grant in any eight consecutive cycles. A held grant must
// stay while take is low.
module tb_rr_arbiter;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [7:0] req, gnt; logic take, any; logic [2:0] gnt_idx;
  rr_arbiter #(.N(8)) dut (.*);
  int cnt [8];
  initial begin
    req = 0; take = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // all request, all taken
    req = 8'hFF; take = 1;
    for (int r = 0; r < 4; r++) begin
      for (int i = 0; i < 8; i++) cnt[i] = 0;
      for (int c = 0; c < 8; c++) begin
        #1; cnt[gnt_idx]++;
        checks++; if (!$onehot(gnt) || gnt != (8'd1 << gnt_idx)) begin failures++; $display("FAIL: gnt %b", gnt); end
        @(posedge clk);
      end
      for (int i = 0; i < 8; i++) begin checks++; if (cnt[i] != 1) begin failures++; $display("FAIL: req %0d got %0d", i, cnt[i]); end end
    end
    // random requests
    for (int c = 0; c < 500; c++) begin
      logic [7:0] g0;
      req = 8'($urandom); take = $urandom % 2; #1;
      checks++;
      if ((gnt & ~req) != 0 || (req != 0) != any || (any && !$onehot(gnt))) begin failures++; $display("FAIL: random gnt"); end
      g0 = gnt;
      if (!take && any) begin
        @(posedge clk); #1;
        checks++; if (gnt != g0) begin failures++; $display("FAIL: grant moved without take"); end
      end else @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
