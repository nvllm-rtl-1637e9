// tb_nand_plane -- programs two pages of a small plane model, then reads
// them back: cache_valid must be seen T_READ + 2 clock edges after the read
// command (T_READ of sensing, one to transfer, one to observe), rows in
// order, and a second read issued while the first page streams (cache
// read) must not wait for the stream to end. discard must empty the cache.
module tb_nand_plane;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int PB = 256, ROWS = PB / 4, TR = 40;
  logic rd_cmd, busy, cache_valid, row_rd, discard, row_last, prog_we;
  logic [9:0] rd_page, prog_page; logic [5:0] prog_row; logic [38:0] row_data, prog_data;
  nand_plane #(.PAGE_BYTES(PB), .PAGES(1024), .MODEL_PAGES(2), .T_READ(TR)) dut (.*);
  function automatic logic [38:0] pat(input int pg, input int r);
    return {7'(pg * 3 + r), 32'(pg * 32'h10001 + r * 32'h9E3779B9)};
  endfunction
  initial begin
    int t0, lat;
    rd_cmd = 0; rd_page = 0; row_rd = 0; discard = 0; prog_we = 0; prog_page = 0; prog_row = 0; prog_data = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int pg = 0; pg < 2; pg++) for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); prog_we = 1; prog_page = 10'(pg + 6); prog_row = 6'(r); prog_data = pat(pg, r);
    end
    @(negedge clk); prog_we = 0;
    // read page 6 (folds onto stored page 0)
    rd_cmd = 1; rd_page = 10'd6; @(negedge clk); rd_cmd = 0;
    lat = 1;
    while (!cache_valid) begin @(negedge clk); lat++; end
    checks++; if (lat != TR + 2) begin failures++; $display("FAIL: read latency %0d", lat); end
    checks++; if (busy) begin failures++; $display("FAIL: array still busy after cache transfer"); end
    // issue the next read right away, stream page 6 meanwhile
    rd_cmd = 1; rd_page = 10'd7; @(negedge clk); rd_cmd = 0;
    t0 = 0;
    for (int r = 0; r < ROWS; r++) begin
      checks++;
      if (!cache_valid || row_data != pat(0, r) || row_last != (r == ROWS - 1)) begin
        failures++; $display("FAIL: page 6 row %0d", r); end
      row_rd = 1; @(negedge clk); t0++;
    end
    row_rd = 0;
    // page 7 was sensed while streaming (TR < ROWS): available at once
    checks++; if (!cache_valid) begin failures++; $display("FAIL: cache read did not overlap"); end
    for (int r = 0; r < 5; r++) begin
      checks++; if (row_data != pat(1, r)) begin failures++; $display("FAIL: page 7 row %0d", r); end
      row_rd = 1; @(negedge clk);
    end
    row_rd = 0; discard = 1; @(negedge clk); discard = 0;
    checks++; if (cache_valid) begin failures++; $display("FAIL: discard"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
