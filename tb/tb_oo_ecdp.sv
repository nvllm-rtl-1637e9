// tb_oo_ecdp -- self-checking test of one OoO-ECDP lane.
//
// The testbench plays the lane's surroundings: a weight stream with
// injected bit errors, the activation and bias buffers, and the
// scoreboard/corrector back end (it takes faulty segments and returns the
// clean weights after a random delay). Expected column results are computed
// here from the clean weights: w . a + bias.
// Phase 1: isolated errors, faulty buffer drained at once -> the lane must
//   take one segment per cycle (no stall; cycle count checked).
// Phase 2: bursts of errors with a slow drain -> stalls must occur and the
//   results must still be right and in column order.
// Phase 3: errors in check bits only.
module tb_oo_ecdp;
  import nv_pkg::*;

  localparam int SEGS  = 8;
  localparam int NCOLS = 12;
  localparam int NSEG  = SEGS * NCOLS;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic        start;
  logic [15:0] cfg_segs, cfg_ncols;
  logic        idle;
  logic        in_valid, in_ready;
  wseg_t       in_seg;
  logic [9:0]  act_addr;
  seg_t        act_data;
  logic [15:0] bias_addr;
  acc_t        bias_data;
  logic        err_valid, err_take;
  seg_t        err_data, err_act;
  par_t        err_par;
  logic [1:0]  err_slot;
  logic        rep_valid;
  seg_t        rep_data, rep_act;
  logic [1:0]  rep_slot;
  logic        res_valid, res_ready;
  logic [15:0] res_col;
  acc_t        res_value;
  logic [31:0] stat_err, stat_stall;

  oo_ecdp dut (.*);

  seg_t  w    [NSEG];
  seg_t  act  [SEGS];
  acc_t  bias [NCOLS];
  logic  bad  [NSEG];
  logic  pbad [NSEG];   // error in check bits only

  assign act_data  = act[act_addr % SEGS];
  assign bias_data = bias[bias_addr % NCOLS];

  // ---------------- weight source ----------------
  int sidx;
  always_comb begin
    in_seg.data = w[sidx % NSEG];
    in_seg.par  = seg_encode(w[sidx % NSEG]);
    if (bad[sidx % NSEG])  in_seg.data[(sidx * 7) % SEG_W] = ~in_seg.data[(sidx * 7) % SEG_W];
    if (pbad[sidx % NSEG]) in_seg.par[(sidx * 3) % PAR_W]  = ~in_seg.par[(sidx * 3) % PAR_W];
  end
  logic src_en;
  assign in_valid = src_en && (sidx < NSEG);
  always @(posedge clk)
    if (!src_en) sidx <= 0;
    else if (in_valid && in_ready) sidx <= sidx + 1;

  // ---------------- back end model ----------------
  int   drain_delay;          // cycles before a faulty segment is taken
  int   wait_cnt;
  seg_t q_data [$];
  seg_t q_act  [$];
  logic [1:0] q_slot [$];
  int   q_due  [$];
  int   cyc = 0;
  int   seg_of_err [$];
  always @(posedge clk) cyc <= cyc + 1;

  assign err_take = err_valid && (wait_cnt >= drain_delay);
  always @(posedge clk) begin
    if (!err_valid || err_take) wait_cnt <= 0;
    else wait_cnt <= wait_cnt + 1;
  end

  // record which segment each error belongs to (errors leave in order)
  always @(posedge clk) begin
    if (err_take) begin
      int s;
      s = seg_of_err.pop_front();
      if (bad[s]) begin
        checks++;
        if (err_data == w[s]) begin failures++; $display("FAIL: faulty segment %0d arrived clean", s); end
      end
      q_data.push_back(w[s]);
      q_act.push_back(err_act);
      q_slot.push_back(err_slot);
      q_due.push_back(cyc + 3 + ($urandom % 8));
    end
  end
  // segments that will be reported as faulty, in stream order
  always @(posedge clk)
    if (in_valid && in_ready && (bad[sidx % NSEG] || pbad[sidx % NSEG])) seg_of_err.push_back(sidx % NSEG);

  always_comb begin
    rep_valid = 1'b0; rep_data = '0; rep_act = '0; rep_slot = '0;
    if (q_due.size() > 0 && q_due[0] <= cyc) begin
      rep_valid = 1'b1; rep_data = q_data[0]; rep_act = q_act[0]; rep_slot = q_slot[0];
    end
  end
  always @(posedge clk)
    if (rep_valid) begin void'(q_data.pop_front()); void'(q_act.pop_front());
                         void'(q_slot.pop_front()); void'(q_due.pop_front()); end

  // ---------------- result checker ----------------
  int ncol_seen;
  always @(posedge clk) res_ready <= ($urandom % 4) != 0;
  always @(posedge clk) begin
    if (res_valid && res_ready) begin
      acc_t exp;
      exp = bias[ncol_seen];
      for (int s = 0; s < SEGS; s++) exp += seg_dot(w[ncol_seen * SEGS + s], act[s]);
      checks++;
      if (res_col != 16'(ncol_seen) || res_value != exp) begin
        failures++;
        $display("FAIL: col %0d (exp %0d) value %0d exp %0d", res_col, ncol_seen, res_value, exp);
      end
      ncol_seen <= ncol_seen + 1;
    end
  end

  task automatic run_job(input int errs_every, input int burst, input bit parity_only,
                         input int delay, output int cycles);
    int t0;
    for (int i = 0; i < NSEG; i++) begin
      for (int j = 0; j < D; j++) w[i][j*8 +: 8] = 8'($urandom);
      bad[i] = 0; pbad[i] = 0;
    end
    for (int i = 0; i < SEGS; i++) for (int j = 0; j < D; j++) act[i][j*8 +: 8] = 8'($urandom);
    for (int i = 0; i < NCOLS; i++) bias[i] = acc_t'($signed($urandom % 2000) - 1000);
    for (int i = 3; i < NSEG; i += errs_every)
      for (int b = 0; b < burst && i + b < NSEG; b++)
        if (parity_only) pbad[i + b] = 1; else bad[i + b] = 1;
    drain_delay = delay;
    ncol_seen = 0;
    src_en = 0;
    @(posedge clk);
    cfg_segs = 16'(SEGS); cfg_ncols = 16'(NCOLS);
    start = 1; @(posedge clk); start = 0;
    src_en = 1;
    t0 = cyc;
    @(posedge clk);
    while (sidx < NSEG) @(posedge clk);
    cycles = cyc - t0;
    while (!idle) @(posedge clk);
    checks++;
    if (ncol_seen != NCOLS) begin failures++; $display("FAIL: %0d columns committed", ncol_seen); end
  endtask

  initial begin
    int cyc1, cyc2, cyc3, st0, er0;
    start = 0; cfg_segs = 0; cfg_ncols = 0; src_en = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // phase 1: one error every 5 segments, drained immediately
    st0 = stat_stall; er0 = stat_err;
    run_job(5, 1, 0, 0, cyc1);
    checks++;
    if (cyc1 > NSEG + 2) begin failures++; $display("FAIL: phase 1 took %0d cycles for %0d segments", cyc1, NSEG); end
    checks++;
    if (stat_stall != st0) begin failures++; $display("FAIL: phase 1 stalled %0d cycles", stat_stall - st0); end
    checks++;
    if (stat_err - er0 != 32'((NSEG - 3 + 4) / 5)) begin failures++; $display("FAIL: error count %0d", stat_err - er0); end

    // phase 2: bursts of 3 errors, slow drain -> stalls
    st0 = stat_stall;
    run_job(9, 3, 0, 3, cyc2);
    checks++;
    if (stat_stall == st0) begin failures++; $display("FAIL: phase 2 never stalled"); end

    // phase 3: check-bit errors only
    run_job(4, 1, 1, 1, cyc3);

    $display("phase cycles: %0d %0d %0d (segments %0d), stalls %0d, errors %0d", cyc1, cyc2, cyc3, NSEG, stat_stall, stat_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog sidx=%0d idle=%0d ncol=%0d stall=%0d err=%0d ev=%0d q=%0d", sidx, idle, ncol_seen, stat_stall, stat_err, err_valid, q_due.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
