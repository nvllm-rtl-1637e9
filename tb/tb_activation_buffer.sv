// tb_activation_buffer -- fills all 1024 words of the 16 KiB buffer, then
// reads random addresses on all eight ports at once.
module tb_activation_buffer;
  import nv_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we; logic [9:0] waddr; seg_t wdata; logic [9:0] raddr [8]; seg_t rdata [8];
  activation_buffer dut (.*);
  seg_t model [1024];
  initial begin
    we = 0; waddr = 0; wdata = 0;
    for (int i = 0; i < 8; i++) raddr[i] = 0;
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk); we = 1; waddr = 10'(a); wdata = {$urandom, $urandom, $urandom, $urandom}; model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 500; n++) begin
      for (int i = 0; i < 8; i++) raddr[i] = 10'($urandom);
      #1;
      for (int i = 0; i < 8; i++) begin checks++; if (rdata[i] != model[raddr[i]]) begin failures++; $display("FAIL: port %0d", i); end end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
