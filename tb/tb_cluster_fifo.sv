// tb_cluster_fifo -- random push/pop against a queue model, with the FIFO
// driven to full and to empty; checks data order, level, full and empty.
module tb_cluster_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int DEPTH = 16;
  logic push, pop, full, empty; logic [155:0] wr_data, rd_data; logic [4:0] level;
  cluster_fifo #(.W(156), .DEPTH(DEPTH)) dut (.*);
  logic [155:0] q [$];
  int nfull = 0;
  initial begin
    push = 0; pop = 0; wr_data = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int c = 0; c < 3000; c++) begin
      int bias;
      bias = (c / 300) % 2;   // alternate filling and draining phases
      #1;
      checks++;
      if (level != 5'(q.size()) || full != (q.size() == DEPTH) || empty != (q.size() == 0)) begin
        failures++; $display("FAIL: level %0d model %0d", level, q.size()); end
      if (!empty) begin checks++; if (rd_data != q[0]) begin failures++; $display("FAIL: data"); end end
      if (full) nfull++;
      push = !full && (($urandom % 4) < (bias ? 1 : 3));
      pop  = !empty && (($urandom % 4) < (bias ? 3 : 1));
      wr_data = {$urandom, $urandom, $urandom, $urandom, 28'($urandom)};
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(wr_data);
    end
    checks++; if (nfull == 0) begin failures++; $display("FAIL: never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
