// tb_erdpe -- the whole error-resilient dot-product engine with 8 lanes,
// fed by testbench weight streams carrying injected errors (isolated
// single-bit errors, check-bit errors, bursts of consecutive faulty
// segments). Results written to the global buffer are compared with
// dot products of the clean weights. With isolated errors and streams that
// never run dry, the job must take no more than segments-per-lane + 40
// cycles (one segment per lane per cycle). Burst errors must cause stalls
// and still give correct results.
module tb_erdpe;
  import nv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int NL = 8, SEGS = 16, NCOLS = 10, NS = SEGS * NCOLS;
  logic start, busy, done, gb_we; logic [15:0] cfg_segs, cfg_ncols; logic [14:0] cfg_bias_base, cfg_res_base, gb_waddr;
  wseg_t ln_seg [NL]; logic [NL-1:0] ln_valid, ln_take; logic [9:0] act_addr [NL]; seg_t act_data [NL];
  logic [14:0] bias_addr [NL]; acc_t bias_data [NL]; acc_t gb_wdata;
  logic [31:0] stat_err, stat_stall, stat_corr, stat_same, stat_uncorr, stat_cycles;
  erdpe dut (.*);

  seg_t w [NL][NS]; seg_t act [SEGS]; acc_t gb [1024]; logic [1:0] kind [NL][NS];
  int idx [NL]; logic go; int gap;
  for (genvar l = 0; l < NL; l++) begin : g
    always_comb begin
      ln_seg[l].data = w[l][idx[l] % NS];
      ln_seg[l].par  = seg_encode(w[l][idx[l] % NS]);
      if (kind[l][idx[l] % NS] == 1) ln_seg[l].data[(idx[l]*11) % SEG_W] = ~ln_seg[l].data[(idx[l]*11) % SEG_W];
      if (kind[l][idx[l] % NS] == 2) ln_seg[l].par[(idx[l]*5) % PAR_W] = ~ln_seg[l].par[(idx[l]*5) % PAR_W];
    end
    logic coin;
    always @(posedge clk) coin <= (gap == 0) || (($urandom % gap) != 0);
    assign ln_valid[l] = go && idx[l] < NS && coin;
    always @(posedge clk) if (!go) idx[l] <= 0; else if (ln_take[l]) idx[l] <= idx[l] + 1;
    assign act_data[l]  = act[act_addr[l] % SEGS];
    assign bias_data[l] = gb[bias_addr[l] % 1024];
  end
  always @(posedge clk) if (gb_we) gb[gb_waddr % 1024] <= gb_wdata;

  task automatic job(input int mode, output int cyc);
    // mode 0: isolated errors; 1: bursts of 4; 2: random gaps + errors
    for (int l = 0; l < NL; l++) for (int i = 0; i < NS; i++) begin
      for (int j = 0; j < 4; j++) w[l][i][j*32 +: 32] = $urandom;
      kind[l][i] = 0;
      // isolated: at most one error in 16 segments of a lane
      if (mode != 1 && (i % 16) == (($urandom % 13) + 2) && ($urandom % 2) == 0) kind[l][i] = 2'(1 + ($urandom % 2));
      if (mode == 1 && (i % 40) >= 5 && (i % 40) < 9) kind[l][i] = 1;
    end
    for (int s = 0; s < SEGS; s++) act[s] = {$urandom, $urandom, $urandom, $urandom};
    for (int i = 0; i < 1024; i++) gb[i] = (i < 512) ? acc_t'($urandom % 512) - 256 : 0;
    gap = (mode == 2) ? 3 : 0;
    @(negedge clk);
    cfg_segs = SEGS; cfg_ncols = NCOLS; cfg_bias_base = 0; cfg_res_base = 512;
    start = 1; go = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    cyc = int'(stat_cycles);
    go = 0;
    for (int l = 0; l < NL; l++) for (int c = 0; c < NCOLS; c++) begin
      acc_t e; e = gb[c * NL + l];
      for (int s = 0; s < SEGS; s++) e += seg_dot(w[l][c*SEGS + s], act[s]);
      checks++;
      if (gb[512 + c * NL + l] != e) begin failures++; if (failures < 6) $display("FAIL: mode %0d lane %0d col %0d got %0d exp %0d", mode, l, c, gb[512 + c*NL + l], e); end
    end
  endtask

  initial begin
    int c0, c1, c2, st0, st1;
    start = 0; go = 0; gap = 0; cfg_segs = 0; cfg_ncols = 0; cfg_bias_base = 0; cfg_res_base = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    st0 = stat_stall;
    job(0, c0);
    checks++; if (c0 > NS + 40) begin failures++; $display("FAIL: isolated errors: %0d cycles for %0d segments", c0, NS); end
    checks++; if (stat_stall != st0) begin failures++; $display("FAIL: stalls with isolated errors"); end
    st1 = stat_stall;
    job(1, c1);
    checks++; if (stat_stall == st1) begin failures++; $display("FAIL: bursts never stalled"); end
    job(2, c2);
    checks++; if (stat_same == 0 || stat_corr == 0 || stat_corr != stat_err) begin failures++; $display("FAIL: stats corr %0d same %0d err %0d", stat_corr, stat_same, stat_err); end
    $display("cycles %0d %0d %0d for %0d segments/lane; errors %0d, corrected %0d (check-bit only %0d), stalls %0d",
             c0, c1, c2, NS, stat_err, stat_corr, stat_same, stat_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (40000) @(posedge clk); failures++; $display("FAIL: watchdog busy=%0d idx0=%0d idle=%b sbp=%0d st=%0d", busy, idx[0], dut.lane_idle, dut.sb_pending, dut.u_ctrl.state);
    $display("lane 0 idx %0d run %0d f %0d ferr %0d h %0d busy %0d%0d%0d%0d pend %0d %0d %0d %0d c %0d", idx[0], dut.g_lane[0].u_lane.run_q, dut.g_lane[0].u_lane.f_valid, dut.g_lane[0].u_lane.f_err, dut.g_lane[0].u_lane.h_valid, dut.g_lane[0].u_lane.s_busy[0], dut.g_lane[0].u_lane.s_busy[1], dut.g_lane[0].u_lane.s_busy[2], dut.g_lane[0].u_lane.s_busy[3], dut.g_lane[0].u_lane.s_pend[0], dut.g_lane[0].u_lane.s_pend[1], dut.g_lane[0].u_lane.s_pend[2], dut.g_lane[0].u_lane.s_pend[3], dut.g_lane[0].u_lane.c_slot);
    $display("lane 1 idx %0d run %0d f %0d ferr %0d h %0d busy %0d%0d%0d%0d pend %0d %0d %0d %0d c %0d", idx[1], dut.g_lane[1].u_lane.run_q, dut.g_lane[1].u_lane.f_valid, dut.g_lane[1].u_lane.f_err, dut.g_lane[1].u_lane.h_valid, dut.g_lane[1].u_lane.s_busy[0], dut.g_lane[1].u_lane.s_busy[1], dut.g_lane[1].u_lane.s_busy[2], dut.g_lane[1].u_lane.s_busy[3], dut.g_lane[1].u_lane.s_pend[0], dut.g_lane[1].u_lane.s_pend[1], dut.g_lane[1].u_lane.s_pend[2], dut.g_lane[1].u_lane.s_pend[3], dut.g_lane[1].u_lane.c_slot);
    $display("lane 2 idx %0d run %0d f %0d ferr %0d h %0d busy %0d%0d%0d%0d pend %0d %0d %0d %0d c %0d", idx[2], dut.g_lane[2].u_lane.run_q, dut.g_lane[2].u_lane.f_valid, dut.g_lane[2].u_lane.f_err, dut.g_lane[2].u_lane.h_valid, dut.g_lane[2].u_lane.s_busy[0], dut.g_lane[2].u_lane.s_busy[1], dut.g_lane[2].u_lane.s_busy[2], dut.g_lane[2].u_lane.s_busy[3], dut.g_lane[2].u_lane.s_pend[0], dut.g_lane[2].u_lane.s_pend[1], dut.g_lane[2].u_lane.s_pend[2], dut.g_lane[2].u_lane.s_pend[3], dut.g_lane[2].u_lane.c_slot);
    $display("lane 3 idx %0d run %0d f %0d ferr %0d h %0d busy %0d%0d%0d%0d pend %0d %0d %0d %0d c %0d", idx[3], dut.g_lane[3].u_lane.run_q, dut.g_lane[3].u_lane.f_valid, dut.g_lane[3].u_lane.f_err, dut.g_lane[3].u_lane.h_valid, dut.g_lane[3].u_lane.s_busy[0], dut.g_lane[3].u_lane.s_busy[1], dut.g_lane[3].u_lane.s_busy[2], dut.g_lane[3].u_lane.s_busy[3], dut.g_lane[3].u_lane.s_pend[0], dut.g_lane[3].u_lane.s_pend[1], dut.g_lane[3].u_lane.s_pend[2], dut.g_lane[3].u_lane.s_pend[3], dut.g_lane[3].u_lane.c_slot);
    $display("lane 4 idx %0d run %0d f %0d ferr %0d h %0d busy %0d%0d%0d%0d pend %0d %0d %0d %0d c %0d", idx[4], dut.g_lane[4].u_lane.run_q, dut.g_lane[4].u_lane.f_valid, dut.g_lane[4].u_lane.f_err, dut.g_lane[4].u_lane.h_valid, dut.g_lane[4].u_lane.s_busy[0], dut.g_lane[4].u_lane.s_busy[1], dut.g_lane[4].u_lane.s_busy[2], dut.g_lane[4].u_lane.s_busy[3], dut.g_lane[4].u_lane.s_pend[0], dut.g_lane[4].u_lane.s_pend[1], dut.g_lane[4].u_lane.s_pend[2], dut.g_lane[4].u_lane.s_pend[3], dut.g_lane[4].u_lane.c_slot);
    $display("lane 5 idx %0d run %0d f %0d ferr %0d h %0d busy %0d%0d%0d%0d pend %0d %0d %0d %0d c %0d", idx[5], dut.g_lane[5].u_lane.run_q, dut.g_lane[5].u_lane.f_valid, dut.g_lane[5].u_lane.f_err, dut.g_lane[5].u_lane.h_valid, dut.g_lane[5].u_lane.s_busy[0], dut.g_lane[5].u_lane.s_busy[1], dut.g_lane[5].u_lane.s_busy[2], dut.g_lane[5].u_lane.s_busy[3], dut.g_lane[5].u_lane.s_pend[0], dut.g_lane[5].u_lane.s_pend[1], dut.g_lane[5].u_lane.s_pend[2], dut.g_lane[5].u_lane.s_pend[3], dut.g_lane[5].u_lane.c_slot);
    $display("lane 6 idx %0d run %0d f %0d ferr %0d h %0d busy %0d%0d%0d%0d pend %0d %0d %0d %0d c %0d", idx[6], dut.g_lane[6].u_lane.run_q, dut.g_lane[6].u_lane.f_valid, dut.g_lane[6].u_lane.f_err, dut.g_lane[6].u_lane.h_valid, dut.g_lane[6].u_lane.s_busy[0], dut.g_lane[6].u_lane.s_busy[1], dut.g_lane[6].u_lane.s_busy[2], dut.g_lane[6].u_lane.s_busy[3], dut.g_lane[6].u_lane.s_pend[0], dut.g_lane[6].u_lane.s_pend[1], dut.g_lane[6].u_lane.s_pend[2], dut.g_lane[6].u_lane.s_pend[3], dut.g_lane[6].u_lane.c_slot);
    $display("lane 7 idx %0d run %0d f %0d ferr %0d h %0d busy %0d%0d%0d%0d pend %0d %0d %0d %0d c %0d", idx[7], dut.g_lane[7].u_lane.run_q, dut.g_lane[7].u_lane.f_valid, dut.g_lane[7].u_lane.f_err, dut.g_lane[7].u_lane.h_valid, dut.g_lane[7].u_lane.s_busy[0], dut.g_lane[7].u_lane.s_busy[1], dut.g_lane[7].u_lane.s_busy[2], dut.g_lane[7].u_lane.s_busy[3], dut.g_lane[7].u_lane.s_pend[0], dut.g_lane[7].u_lane.s_pend[1], dut.g_lane[7].u_lane.s_pend[2], dut.g_lane[7].u_lane.s_pend[3], dut.g_lane[7].u_lane.c_slot);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
