// tb_nand_cmos -- the NAND CMOS wafer (clusters, prefetchers, crossbar,
// ERDPE, buffers) at reduced page size and read latency. The testbench
// programs two pages per plane with random weights and their check words,
// corrupting some rows (single data-bit errors, check-bit errors and one
// double error per cluster), loads activations and biases, and runs jobs
// with a random cluster-to-lane mapping. Results read back through the
// host port must equal the dot products of the clean weights (of the
// stored, uncorrectable weights for a double-error row), and the
// statistics must show corrections and one uncorrectable row per cluster
// per pass over the rows.
module tb_nand_cmos;
  import nv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int NC = 8, PB = 256, ROWS = PB / 4, MP = 2, PAGES = 262144;
  localparam int SEGS = 8, NCOLS = 12, NS = SEGS * NCOLS;   // 96 segments: 1.5 pages
  logic start, busy, done, act_we, gb_h_we, prog_we;
  logic [17:0] start_page, prog_page; logic [15:0] cfg_segs, cfg_ncols;
  logic [14:0] cfg_bias_base, cfg_res_base, gb_h_addr;
  logic [2:0] xbar_sel [NC]; logic [9:0] act_waddr; seg_t act_wdata;
  acc_t gb_h_wdata, gb_h_rdata; logic [2:0] prog_cluster; logic [1:0] prog_plane;
  logic [5:0] prog_row; logic [38:0] prog_data;
  logic [31:0] stat_err, stat_stall, stat_corr, stat_same, stat_uncorr, stat_cycles, stat_reads;
  nand_cmos #(.PAGE_BYTES(PB), .T_READ(20), .CF_DEPTH(16)) dut (.*);

  seg_t eff [NC][MP * ROWS];     // what the engine must compute with
  seg_t act [SEGS];
  acc_t bias [NC * NCOLS];
  int   n_bad_rows;

  task automatic program_all();
    n_bad_rows = 0;
    for (int c = 0; c < NC; c++) begin
      int dbl; dbl = $urandom % (MP * ROWS * 4);
      for (int r = 0; r < MP * ROWS; r++) for (int p = 0; p < 4; p++) begin
        sub_t d, s; subp_t k; int kind, bd, bk;
        d = $urandom; k = ham_encode(d); s = d;
        kind = (r * 4 + p == dbl) ? 3 : (($urandom % 40) == 0) ? 1 : (($urandom % 80) == 0) ? 2 : 0;
        bd = $urandom % 32; bk = $urandom % 7;
        if (kind == 1) s[bd] = ~s[bd];
        if (kind == 2) k[bk] = ~k[bk];
        if (kind == 3) begin int b; b = $urandom % 31; s[b] = ~s[b]; s[b + 1] = ~s[b + 1]; end
        eff[c][r][p*32 +: 32] = (kind == 3) ? s : d;
        @(negedge clk);
        prog_we = 1; prog_cluster = 3'(c); prog_plane = 2'(p); prog_page = 18'(r / ROWS);
        prog_row = 6'(r % ROWS); prog_data = {k, s};
      end
    end
    @(negedge clk); prog_we = 0;
  endtask

  task automatic run_job(input int sp);
    logic [2:0] perm [NC];
    for (int i = 0; i < NC; i++) perm[i] = 3'(i);
    for (int i = NC - 1; i > 0; i--) begin int j; logic [2:0] t; j = $urandom % (i + 1); t = perm[i]; perm[i] = perm[j]; perm[j] = t; end
    for (int s = 0; s < SEGS; s++) begin
      act[s] = {$urandom, $urandom, $urandom, $urandom};
      @(negedge clk); act_we = 1; act_waddr = 10'(s); act_wdata = act[s];
    end
    @(negedge clk); act_we = 0;
    for (int i = 0; i < NC * NCOLS; i++) begin
      bias[i] = acc_t'($urandom % 4000) - 2000;
      @(negedge clk); gb_h_we = 1; gb_h_addr = 15'(100 + i); gb_h_wdata = bias[i];
    end
    @(negedge clk); gb_h_we = 0;
    for (int l = 0; l < NC; l++) xbar_sel[l] = perm[l];
    start_page = 18'(sp); cfg_segs = SEGS; cfg_ncols = NCOLS; cfg_bias_base = 100; cfg_res_base = 2000;
    start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    for (int l = 0; l < NC; l++) for (int c = 0; c < NCOLS; c++) begin
      acc_t e;
      e = bias[c * NC + l];
      for (int s = 0; s < SEGS; s++) e += seg_dot(eff[perm[l]][((sp % MP) * ROWS + c * SEGS + s) % (MP * ROWS)], act[s]);
      gb_h_addr = 15'(2000 + c * NC + l);
      @(negedge clk);
      checks++;
      if (gb_h_rdata != e) begin failures++; if (failures < 6) $display("FAIL: start %0d lane %0d col %0d got %0d exp %0d", sp, l, c, gb_h_rdata, e); end
    end
  endtask

  initial begin
    start = 0; act_we = 0; gb_h_we = 0; prog_we = 0; start_page = 0; prog_page = 0; cfg_segs = 0; cfg_ncols = 0;
    cfg_bias_base = 0; cfg_res_base = 0; gb_h_addr = 0; act_waddr = 0; act_wdata = '0; gb_h_wdata = 0;
    prog_cluster = 0; prog_plane = 0; prog_row = 0; prog_data = '0;
    for (int l = 0; l < NC; l++) xbar_sel[l] = 3'(l);
    repeat (3) @(posedge clk); rst_n = 1;
    program_all();
    run_job(0);
    run_job(1);     // starts on the second stored page and wraps onto the first
    run_job(0);
    checks++; if (stat_corr == 0 || stat_same == 0) begin failures++; $display("FAIL: no corrections (%0d) or no check-bit-only corrections (%0d)", stat_corr, stat_same); end
    checks++; if (stat_uncorr == 0) begin failures++; $display("FAIL: double errors never reported"); end
    checks++; if (stat_reads != 32'(3 * 2 * NC)) begin failures++; $display("FAIL: %0d page reads", stat_reads); end
    $display("errors %0d corrected %0d check-bit-only %0d uncorrectable %0d stalls %0d reads %0d last job %0d cycles",
             stat_err, stat_corr, stat_same, stat_uncorr, stat_stall, stat_reads, stat_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
