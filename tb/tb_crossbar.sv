// tb_crossbar -- random one-to-one lane-to-cluster maps: each lane must
// see its selected cluster's segment and valid, and a lane's take must pop
// exactly its selected cluster.
module tb_crossbar;
  import nv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [2:0] sel [8]; wseg_t cl_seg [8]; logic [7:0] cl_valid, cl_pop, ln_valid, ln_take; wseg_t ln_seg [8];
  crossbar #(.NC(8), .NL(8)) dut (.*);
  initial begin
    for (int i = 0; i < 8; i++) sel[i] = 3'(i);
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      int perm [8]; logic [7:0] exp_pop;
      @(negedge clk);
      for (int i = 0; i < 8; i++) perm[i] = i;
      for (int i = 7; i > 0; i--) begin int j, t; j = $urandom % (i + 1); t = perm[i]; perm[i] = perm[j]; perm[j] = t; end
      for (int i = 0; i < 8; i++) begin
        sel[i] = 3'(perm[i]);
        cl_seg[i] = {$urandom, $urandom, $urandom, $urandom, 28'($urandom)};
      end
      cl_valid = 8'($urandom); ln_take = 8'($urandom);
      #1;
      exp_pop = 0;
      for (int l = 0; l < 8; l++) begin
        checks++;
        if (ln_seg[l] != cl_seg[perm[l]] || ln_valid[l] != cl_valid[perm[l]]) begin failures++; $display("FAIL: lane %0d", l); end
        if (ln_take[l]) exp_pop[perm[l]] = 1;
      end
      checks++; if (cl_pop != exp_pop) begin failures++; $display("FAIL: pop %b exp %b", cl_pop, exp_pop); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
