// tb_plane_cluster -- loads distinct rows into the four planes of a small
// cluster, reads a page and moves rows into the cluster FIFO; each segment
// must be the four planes' rows side by side (plane p in data bits
// [32p+31:32p], check bits [7p+6:7p]) and come out of the FIFO in order.
module tb_plane_cluster;
  import nv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int PB = 128, ROWS = PB / 4;
  logic pf_rd, pf_row, pf_discard, busy, cache_valid, fifo_full, seg_valid, seg_pop, prog_we;
  logic [9:0] pf_page, prog_page; logic [1:0] prog_plane; logic [4:0] prog_row; logic [38:0] prog_data;
  wseg_t seg; logic [6:0] level;
  plane_cluster #(.PAGE_BYTES(PB), .PAGES(1024), .MODEL_PAGES(2), .T_READ(10), .CF_DEPTH(64)) dut (.*);
  function automatic logic [38:0] pat(input int p, input int r);
    return {7'(p * 5 + r), 32'(p * 32'h01000193 + r * 32'h9E3779B9 + 7)};
  endfunction
  initial begin
    pf_rd = 0; pf_page = 0; pf_row = 0; pf_discard = 0; seg_pop = 0; prog_we = 0;
    prog_page = 0; prog_plane = 0; prog_row = 0; prog_data = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int p = 0; p < 4; p++) for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); prog_we = 1; prog_plane = 2'(p); prog_page = 10'd1; prog_row = 5'(r); prog_data = pat(p, r);
    end
    @(negedge clk); prog_we = 0;
    pf_rd = 1; pf_page = 10'd1; @(negedge clk); pf_rd = 0;
    while (!cache_valid) @(negedge clk);
    for (int r = 0; r < ROWS; r++) begin pf_row = 1; @(negedge clk); end
    pf_row = 0;
    checks++; if (level != 7'(ROWS) || cache_valid) begin failures++; $display("FAIL: level %0d", level); end
    for (int r = 0; r < ROWS; r++) begin
      wseg_t e;
      for (int p = 0; p < 4; p++) begin
        logic [38:0] x; x = pat(p, r);
        e.data[p*32 +: 32] = x[31:0]; e.par[p*7 +: 7] = x[38:32];
      end
      checks++;
      if (!seg_valid || seg != e) begin failures++; $display("FAIL: segment %0d", r); end
      seg_pop = 1; @(negedge clk);
    end
    seg_pop = 0;
    checks++; if (seg_valid) begin failures++; $display("FAIL: FIFO not empty"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
