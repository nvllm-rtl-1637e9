// tb_cluster_prefetcher -- the prefetcher drives a model cluster (sensing
// time TR, cache register, FIFO drained slowly by a fake lane). Checks:
// pages are read in address order from start_page, exactly
// ceil(n_segs/ROWS) of them; exactly n_segs rows enter the FIFO; rows past
// n_segs on the last page are discarded; a page read is issued while the
// previous page is still streaming; the FIFO-full back-pressure is obeyed.
module tb_cluster_prefetcher;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int ROWS = 16, TR = 6, CFD = 8;
  logic start, busy, pf_rd, pf_row, pf_discard, cl_busy, cl_cache_valid, cl_fifo_full;
  logic [9:0] start_page, pf_page; logic [23:0] n_segs; logic [31:0] stat_reads;
  cluster_prefetcher #(.ROWS(ROWS), .PAGES(1024), .NS_W(24)) dut (.*);
  // cluster model
  int sense_t; logic sensing, sensed; int row; int fifo; int pages [$]; int cache_pg, sense_pg;
  int pushed = 0, overlap = 0, nfull = 0, discards = 0;
  assign cl_busy = sensing || sensed;
  assign cl_fifo_full = (fifo == CFD);
  always @(posedge clk) begin
    if (!rst_n) begin sensing <= 0; sensed <= 0; cl_cache_valid <= 0; fifo <= 0; row <= 0; end
    else begin
      if (pf_rd) begin
        checks++; if (cl_busy) begin failures++; $display("FAIL: read while busy"); end
        pages.push_back(int'(pf_page));
        if (cl_cache_valid) overlap++;
        sensing <= 1; sense_t <= TR; sense_pg <= int'(pf_page);
      end
      if (sensing) begin if (sense_t == 0) begin sensing <= 0; sensed <= 1; end else sense_t <= sense_t - 1; end
      if (pf_row) begin
        checks++; if (!cl_cache_valid || cl_fifo_full) begin failures++; $display("FAIL: row move without data/room"); end
        pushed++;
      end
      if (cl_fifo_full) nfull++;
      if (pf_discard) discards++;
      fifo <= fifo + (pf_row ? 1 : 0) - ((fifo > 0 && ($urandom % 3 == 0)) ? 1 : 0);
      if (cl_cache_valid && (pf_discard || (pf_row && row == ROWS - 1))) cl_cache_valid <= 0;
      else if (pf_row) row <= row + 1;
      if (sensed && (!cl_cache_valid || pf_discard || (pf_row && row == ROWS - 1))) begin
        sensed <= 0; cl_cache_valid <= 1; row <= 0; cache_pg <= sense_pg;
      end
    end
  end
  task automatic job(input int sp, input int ns);
    pushed = 0; pages.delete(); overlap = 0; discards = 0;
    @(negedge clk); start = 1; start_page = 10'(sp); n_segs = 24'(ns); @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    repeat (30) @(negedge clk);
    checks++; if (pushed != ns) begin failures++; $display("FAIL: pushed %0d of %0d", pushed, ns); end
    checks++; if (pages.size() != (ns + ROWS - 1) / ROWS) begin failures++; $display("FAIL: %0d pages", pages.size()); end
    foreach (pages[i]) begin checks++; if (pages[i] != sp + i) begin failures++; $display("FAIL: page order"); end end
    checks++; if (ns > 2 * ROWS && overlap == 0) begin failures++; $display("FAIL: no read ahead"); end
    checks++; if ((ns % ROWS) != 0 && discards == 0) begin failures++; $display("FAIL: tail not discarded"); end
    checks++; if (cl_cache_valid) begin failures++; $display("FAIL: cache left full"); end
  endtask
  initial begin
    start = 0; start_page = 0; n_segs = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    job(5, 80);
    job(100, 37);
    job(3, 16);
    checks++; if (nfull == 0) begin failures++; $display("FAIL: FIFO never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
