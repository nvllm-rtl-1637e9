// tb_global_buffer -- host writes and reads (one-cycle read latency), ERDPE
// result writes, bias reads on all ports; the ERDPE write must win over a
// host write to the same cycle.
module tb_global_buffer;
  import nv_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [14:0] raddr [8]; acc_t rdata [8]; logic we, h_we; logic [14:0] waddr, h_addr; acc_t wdata, h_wdata, h_rdata;
  global_buffer dut (.*);
  acc_t model [18432];
  initial begin
    we = 0; h_we = 0; waddr = 0; h_addr = 0; wdata = 0; h_wdata = 0;
    for (int i = 0; i < 8; i++) raddr[i] = 0;
    for (int a = 0; a < 18432; a++) begin
      @(negedge clk); h_we = 1; h_addr = 15'(a); h_wdata = $urandom; model[a] = h_wdata;
    end
    @(negedge clk); h_we = 0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      we = $urandom % 2; waddr = 15'($urandom % 18432); wdata = $urandom;
      h_we = $urandom % 2; h_addr = 15'($urandom % 18432); h_wdata = $urandom;
      for (int i = 0; i < 8; i++) raddr[i] = 15'($urandom % 18432);
      #1;
      for (int i = 0; i < 8; i++) begin checks++; if (rdata[i] != model[raddr[i]]) begin failures++; $display("FAIL: bias port %0d", i); end end
      @(posedge clk); #1;
      checks++; if (h_rdata != model[h_addr]) begin failures++; $display("FAIL: host read"); end
      if (we) model[waddr] = wdata; else if (h_we) model[h_addr] = h_wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (40000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
