// tb_erdpe_ctrl -- the ERDPE controller against model lanes. Each model
// lane offers a random number of column results at random times; the
// testbench checks that every result is written once to
// res_base + col * NL + lane with its value, at most one write per cycle,
// that lane_start pulses once per job, and that done comes only after every
// lane is idle and the scoreboard is empty.
module tb_erdpe_ctrl;
  import nv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int NL = 8;
  logic start, lane_start, busy, done, sb_pending, gb_we;
  logic [14:0] cfg_res_base, gb_waddr;
  logic [NL-1:0] lane_idle, res_valid, res_ready;
  logic [15:0] res_col [NL]; acc_t res_value [NL]; acc_t gb_wdata;
  logic [31:0] stat_cycles;
  erdpe_ctrl dut (.*);

  int ncol [NL]; int sent [NL]; bit run [NL]; int hold [NL];
  int written [int]; int nstarts; bit sbp_req;
  for (genvar l = 0; l < NL; l++) begin : g
    assign res_valid[l] = run[l] && sent[l] < ncol[l] && hold[l] == 0;
    assign res_col[l]   = 16'(sent[l]);
    assign res_value[l] = acc_t'(sent[l] * 1000 + l);
    assign lane_idle[l] = !run[l] || sent[l] >= ncol[l];
    always @(posedge clk) begin
      if (lane_start) begin run[l] <= 1; sent[l] <= 0; hold[l] <= $urandom % 6; end
      else if (res_valid[l] && res_ready[l]) begin sent[l] <= sent[l] + 1; hold[l] <= $urandom % 4; end
      else if (hold[l] > 0) hold[l] <= hold[l] - 1;
    end
  end
  assign sb_pending = sbp_req;
  always @(posedge clk) if (rst_n) begin
    if (lane_start) nstarts <= nstarts + 1;
    if (gb_we) begin
      int key; key = int'(gb_waddr);
      checks++;
      if (written.exists(key)) begin failures++; $display("FAIL: address %0d written twice", key); end
      written[key] = int'(gb_wdata);
    end
    if (done) begin
      checks++;
      if (!(&lane_idle) || sb_pending) begin failures++; $display("FAIL: done while work remains"); end
    end
    checks++;
    if ($countones(res_ready) > 1) begin failures++; $display("FAIL: two grants"); end
  end

  initial begin
    nstarts = 0; start = 0; cfg_res_base = 0; sbp_req = 0;
    for (int l = 0; l < NL; l++) begin run[l] = 0; sent[l] = 0; ncol[l] = 0; hold[l] = 0; end
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int job = 0; job < 20; job++) begin
      int base;
      base = $urandom % 4096;
      written.delete();
      for (int l = 0; l < NL; l++) ncol[l] = $urandom % 12;
      @(negedge clk);
      cfg_res_base = 15'(base); start = 1; @(negedge clk); start = 0;
      // hold the scoreboard busy for a while after the lanes finish
      fork
        begin repeat ($urandom % 60) @(negedge clk); sbp_req = 1; repeat ($urandom % 40 + 1) @(negedge clk); sbp_req = 0; end
      join_none
      while (!done) @(negedge clk);
      wait fork;
      for (int l = 0; l < NL; l++) for (int c = 0; c < ncol[l]; c++) begin
        int a; a = (base + c * NL + l) % 32768;
        checks++;
        if (!written.exists(a) || written[a] != c * 1000 + l) begin failures++; $display("FAIL: job %0d lane %0d col %0d", job, l, c); end
      end
      for (int l = 0; l < NL; l++) run[l] = 0;
    end
    checks++; if (nstarts != 20) begin failures++; $display("FAIL: %0d lane starts", nstarts); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (40000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
