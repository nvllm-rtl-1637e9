// tb_kv_scheduler -- runs forward passes with a growing NPU busy time and
// checks the bitmap against an independent model of Algorithm 2:
//   C_th = floor(P/u) * C_NPU; if dC > C_th clear the ceil(dC/C_th) highest
//   set bits. The first pass, and the pass after every update, only set the
//   reference latency. Also checks the scan time: 2 cycles + one per bit
//   visited, and that a large dC can clear the whole bitmap.
module tb_kv_scheduler;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int H = 64;
  logic [31:0] cfg_p, cfg_u, cfg_cnpu, last_dc, last_k, stat_moved;
  logic npu_busy, fwd_end, busy, upd; logic [H-1:0] bitmap;
  kv_scheduler #(.H(H)) dut (.*);
  logic [H-1:0] model; int ref_c; bit have_ref;
  int nupd = 0, nkeep = 0;
  task automatic pass(input int lat);
    int th, dc, k, cnt, i, visited, t;
    @(negedge clk);
    for (int c = 0; c < lat; ) begin npu_busy = ($urandom % 5) != 0; @(negedge clk); if (npu_busy) c++; end
    npu_busy = 0;
    fwd_end = 1; @(negedge clk); fwd_end = 0;
    // model
    th = (cfg_p / cfg_u) * cfg_cnpu;
    if (!have_ref) begin ref_c = lat; have_ref = 1; return; end
    dc = lat > ref_c ? lat - ref_c : 0;
    t = 0;
    while (busy) begin @(negedge clk); t++; end
    if (th == 0 || dc <= th) begin
      nkeep++;
      checks++; if (bitmap != model) begin failures++; $display("FAIL: bitmap changed for dC=%0d", dc); end
      return;
    end
    k = (dc + th - 1) / th; cnt = 0; i = H - 1; visited = 0;
    while (cnt < k && i >= 0) begin if (model[i]) begin model[i] = 0; cnt++; end i--; visited++; end
    nupd++;
    have_ref = 0;   // the next pass re-takes the reference
    checks++; if (bitmap != model) begin failures++; $display("FAIL: bitmap %h exp %h (dC=%0d k=%0d)", bitmap, model, dc, k); end
    checks++; if (last_k != 32'(k) || last_dc != 32'(dc)) begin failures++; $display("FAIL: k %0d exp %0d", last_k, k); end
    checks++; if (t > visited + 4 || t < visited) begin failures++; $display("FAIL: scan took %0d for %0d bits", t, visited); end
  endtask
  initial begin
    cfg_p = 65536; cfg_u = 4096; cfg_cnpu = 2;   // C_th = 32
    npu_busy = 0; fwd_end = 0; model = '1; have_ref = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    checks++; if (bitmap != '1) begin failures++; $display("FAIL: reset bitmap"); end
    pass(100); pass(120); pass(160); pass(200); pass(300); pass(320); pass(700);
    pass(700); pass(2000); pass(2000); pass(4000);
    cfg_u = 100000;  // no column fits: keep
    pass(100); pass(3000);
    checks++; if (nupd < 3 || nkeep < 2) begin failures++; $display("FAIL: updates %0d keeps %0d", nupd, nkeep); end
    $display("updates %0d keeps %0d moved %0d", nupd, nkeep, stat_moved);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
