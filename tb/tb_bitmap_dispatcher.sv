// tb_bitmap_dispatcher -- random bitmaps and random ready on both sides:
// every column 0..H-1 must appear once, in order, on the side its bit
// selects; counts must match the bitmap's popcount.
module tb_bitmap_dispatcher;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int H = 64;
  logic start, busy, npu_valid, npu_ready, nand_valid, nand_ready; logic [H-1:0] bitmap;
  logic [5:0] npu_col, nand_col; logic [31:0] n_npu, n_nand;
  bitmap_dispatcher #(.H(H)) dut (.*);
  int next;
  always @(posedge clk) begin
    npu_ready <= $urandom % 2; nand_ready <= $urandom % 3 != 0;
    if (npu_valid && npu_ready) begin checks++; if (npu_col != 6'(next) || !bitmap[npu_col]) begin failures++; $display("FAIL: npu col %0d", npu_col); end next <= next + 1; end
    if (nand_valid && nand_ready) begin checks++; if (nand_col != 6'(next) || bitmap[nand_col]) begin failures++; $display("FAIL: nand col %0d", nand_col); end next <= next + 1; end
    if (npu_valid && nand_valid) begin failures++; $display("FAIL: both valid"); end
  end
  initial begin
    start = 0; bitmap = 0; npu_ready = 0; nand_ready = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 6; r++) begin
      @(negedge clk);
      bitmap = {$urandom, $urandom}; if (r == 0) bitmap = '1; if (r == 1) bitmap = '0;
      next = 0; start = 1; @(negedge clk); start = 0;
      while (busy) @(negedge clk);
      checks++; if (next != H || n_npu != 32'($countones(bitmap)) || n_nand != 32'(H - $countones(bitmap))) begin
        failures++; $display("FAIL: walk %0d next %0d npu %0d nand %0d", r, next, n_npu, n_nand); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
