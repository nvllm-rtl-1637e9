// tb_erdpe_scoreboard -- the testbench allocates faulty segments from
// random lanes, plays the corrector hub (fixed delay, returns the clean
// segment) and checks that every entry comes back once on its lane's
// replay port with its slot, activation and corrected data; that
// in_ready drops when all entries are used; and that pending_any clears.
module tb_erdpe_scoreboard;
  import nv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, in_ready, cq_valid, cq_ready, cr_valid, cr_changed, cr_uncorr, pending_any;
  logic [2:0] in_lane, cq_tag, cr_tag; logic [1:0] in_slot, rep_slot;
  seg_t in_data, in_act, cq_data, cr_data, rep_data, rep_act; par_t in_par, cq_par;
  logic [7:0] rep_valid; logic [31:0] stat_corr, stat_same, stat_uncorr;
  erdpe_scoreboard #(.NL(8), .ENTRIES(8), .SW(2)) dut (.*);

  // hub model: accepts when idle, answers after 4 cycles
  int hub_t; logic hub_busy; logic [2:0] hub_tag; seg_t hub_d; par_t hub_p;
  assign cq_ready = !hub_busy;
  always @(posedge clk) begin
    cr_valid <= 0;
    if (!rst_n) begin hub_busy <= 0; end
    else if (hub_busy) begin
      hub_t <= hub_t - 1;
      if (hub_t == 0) begin
        seg_t f; f = hub_d;
        for (int b = 0; b < SEG_W; b++) begin seg_t g; g = f; g[b] = ~g[b]; if (seg_encode(g) == hub_p) f = g; end
        cr_valid <= 1; cr_tag <= hub_tag; cr_data <= f; cr_changed <= (f != hub_d); cr_uncorr <= 0;
        hub_busy <= 0;
      end
    end else if (cq_valid) begin
      hub_busy <= 1; hub_t <= 3; hub_tag <= cq_tag; hub_d <= cq_data; hub_p <= cq_par;
    end
  end

  // expected set keyed by activation word (unique per allocation)
  seg_t exp_data [int]; int exp_lane [int]; int exp_slot [int];
  int nrep = 0, nfullseen = 0;
  always @(posedge clk) if (rep_valid != 0) begin
    int k; k = int'(rep_act[31:0]);
    checks++;
    if (!exp_data.exists(k) || !$onehot(rep_valid) || rep_valid != (8'd1 << exp_lane[k]) ||
        rep_data != exp_data[k] || rep_slot != 2'(exp_slot[k])) begin
      failures++; $display("FAIL: replay key %0d lanes %b", k, rep_valid);
    end else exp_data.delete(k);
    nrep++;
  end

  initial begin
    in_valid = 0; in_lane = 0; in_slot = 0; in_data = 0; in_par = 0; in_act = 0;
    cr_valid = 0; cr_tag = 0; cr_data = 0; cr_changed = 0; cr_uncorr = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int n = 0; n < 200; n++) begin
      seg_t c; int b;
      for (int j = 0; j < 4; j++) c[j*32 +: 32] = $urandom;
      b = $urandom % SEG_W;
      @(negedge clk);
      while (!in_ready) begin in_valid = 0; nfullseen++; @(negedge clk); end
      in_valid = 1; in_lane = 3'($urandom); in_slot = 2'($urandom);
      in_data = c ^ (seg_t'(1) << b); in_par = seg_encode(c); in_act = seg_t'(n + 1000);
      exp_data[n + 1000] = c; exp_lane[n + 1000] = int'(in_lane); exp_slot[n + 1000] = int'(in_slot);
      if (n % 40 == 39) begin @(negedge clk); in_valid = 0; repeat (60) @(posedge clk); end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (400) @(posedge clk);
    checks++; if (nrep != 200 || exp_data.size() != 0) begin failures++; $display("FAIL: %0d replays", nrep); end
    checks++; if (pending_any) begin failures++; $display("FAIL: pending_any stuck"); end
    checks++; if (stat_corr != 200) begin failures++; $display("FAIL: stat_corr %0d", stat_corr); end
    checks++; if (nfullseen == 0) begin failures++; $display("FAIL: scoreboard never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (40000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
