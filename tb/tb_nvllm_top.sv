// tb_nvllm_top -- end-to-end test of the chip at its full-size parameters
// (no overrides: 8 plane clusters of 2x2 planes, 16 KiB pages, 1792-cycle
// page read, 4096-entry cluster FIFOs, 72 KiB global buffer, 16 KiB
// activation buffer, 8 correctors, 4-lane NPU, 4096-column bitmap).
//
// 1. FFN pass on the NAND side: 8 lanes x 40 columns x 128 segments, so
//    every cluster streams 5120 segments across two pages. The pages carry
//    isolated single-bit errors, check-bit errors, a burst of faulty rows in
//    every cluster and one double-bit (uncorrectable) row per cluster.
//    Every result read back from the global buffer is compared with the
//    dot product of the clean (for the double error: stored) weights.
// 2. Decode passes: each pass runs an NPU job whose size grows with the
//    pass (the attention work growing with the KV cache), checks the NPU
//    results, ends the pass with fwd_end and checks the scheduler's bitmap
//    against a model of Algorithm 2.
// 3. A dispatcher walk over the final bitmap, checking that every column
//    goes to the side its bit names.
// Mechanisms counted, each must occur at least once: corrected segments,
// check-bit-only corrections, uncorrectable rows, lane stalls, page reads
// overlapping segment consumption (cache read), bitmap updates, columns
// dispatched to the NPU and to the NAND side.
module tb_nvllm_top;
  import nv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NC = 8, ROWS = 4096, TR = 1792, H = 4096, NNL = 4;
  localparam int SEGS = 128, NCOLS = 40, NS = SEGS * NCOLS;

  logic start, busy, done, act_we, gb_h_we, prog_we;
  logic [17:0] start_page, prog_page; logic [15:0] cfg_segs, cfg_ncols;
  logic [14:0] cfg_bias_base, cfg_res_base, gb_h_addr;
  logic [2:0] xbar_sel [NC]; logic [9:0] act_waddr; seg_t act_wdata;
  acc_t gb_h_wdata, gb_h_rdata; logic [2:0] prog_cluster; logic [1:0] prog_plane;
  logic [11:0] prog_row; logic [38:0] prog_data;
  logic [31:0] stat_err, stat_stall, stat_corr, stat_same, stat_uncorr, stat_cycles, stat_reads;
  logic npu_start, npu_busy, npu_in_we, npu_res_valid, npu_res_ready;
  logic [15:0] npu_segs, npu_ncols, npu_res_col; logic [NNL-1:0] dram_valid, dram_take;
  seg_t dram_seg [NNL]; logic [9:0] npu_in_waddr; seg_t npu_in_wdata;
  logic [15:0] npu_bias_addr [NNL]; acc_t npu_bias_data [NNL];
  logic [1:0] npu_res_lane; acc_t npu_res_value;
  logic [31:0] kv_p, kv_u, kv_cnpu, kv_last_dc, kv_last_k, kv_moved, disp_n_npu, disp_n_nand;
  logic fwd_end, kv_busy, kv_upd, disp_start, disp_busy, disp_npu_valid, disp_npu_ready, disp_nand_valid, disp_nand_ready;
  logic [11:0] disp_npu_col, disp_nand_col;

  nvllm_top dut (.*);

  // ---------------- mechanism counters ----------------
  int n_overlap = 0, n_upd = 0, n_disp_npu = 0, n_disp_nand = 0, n_npu_res = 0;
  for (genvar c = 0; c < NC; c++) begin : g_ov
    always @(posedge clk) if (rst_n && dut.u_nand.g_cl[c].cb && dut.u_nand.cl_pop[c]) n_overlap++;
  end
  always @(posedge clk) if (rst_n && kv_upd) n_upd++;

  // ---------------- NAND side ----------------
  seg_t eff [NC][NS];
  seg_t act [SEGS];
  acc_t bias [NC * NCOLS];

  task automatic program_all();
    for (int c = 0; c < NC; c++) begin
      int dbl; dbl = 200 + $urandom % 3000;
      for (int r = 0; r < NS; r++) for (int p = 0; p < 4; p++) begin
        sub_t d, s; subp_t k; int kind, bd, bk;
        d = $urandom; k = ham_encode(d); s = d;
        kind = (p == 1 && r == dbl) ? 3 :
               (p == 0 && r >= 1000 && r < 1004) ? 1 :
               (($urandom % 200) == 0) ? 1 : (($urandom % 400) == 0) ? 2 : 0;
        bd = $urandom % 32; bk = $urandom % 7;
        if (kind == 1) s[bd] = ~s[bd];
        if (kind == 2) k[bk] = ~k[bk];
        if (kind == 3) begin s[bd % 31] = ~s[bd % 31]; s[bd % 31 + 1] = ~s[bd % 31 + 1]; end
        eff[c][r][p*32 +: 32] = (kind == 3) ? s : d;
        @(negedge clk);
        prog_we = 1; prog_cluster = 3'(c); prog_plane = 2'(p);
        prog_page = 18'(r / ROWS); prog_row = 12'(r % ROWS); prog_data = {k, s};
      end
    end
    @(negedge clk); prog_we = 0;
  endtask

  task automatic ffn_pass();
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
      @(negedge clk); gb_h_we = 1; gb_h_addr = 15'(i); gb_h_wdata = bias[i];
    end
    @(negedge clk); gb_h_we = 0;
    for (int l = 0; l < NC; l++) xbar_sel[l] = perm[l];
    start_page = 0; cfg_segs = SEGS; cfg_ncols = NCOLS; cfg_bias_base = 0; cfg_res_base = 15'(NC * NCOLS);
    start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    for (int l = 0; l < NC; l++) for (int c = 0; c < NCOLS; c++) begin
      acc_t e;
      e = bias[c * NC + l];
      for (int s = 0; s < SEGS; s++) e += seg_dot(eff[perm[l]][c * SEGS + s], act[s]);
      gb_h_addr = 15'(NC * NCOLS + c * NC + l);
      @(negedge clk);
      checks++;
      if (gb_h_rdata != e) begin failures++; if (failures < 6) $display("FAIL: lane %0d col %0d got %0d exp %0d", l, c, gb_h_rdata, e); end
    end
    checks++;
    if (stat_cycles > 32'(NS + TR + 600)) begin failures++; $display("FAIL: FFN pass took %0d cycles for %0d segments per lane", stat_cycles, NS); end
    checks++;
    if (stat_reads != 32'(2 * NC)) begin failures++; $display("FAIL: %0d page reads, expected %0d", stat_reads, 2 * NC); end
  endtask

  // ---------------- NPU side ----------------
  localparam int NSG = 16, MAXC = 64;
  seg_t wn [NNL][NSG * MAXC];
  seg_t an [NSG];
  int   didx [NNL];
  bit   dram_on;
  for (genvar l = 0; l < NNL; l++) begin : g_dram
    logic coin;
    always @(posedge clk) coin <= ($urandom % 4) != 0;
    assign dram_valid[l]    = dram_on && coin && didx[l] < NSG * int'(npu_ncols);
    assign dram_seg[l]      = wn[l][didx[l] % (NSG * MAXC)];
    assign npu_bias_data[l] = acc_t'(int'(npu_bias_addr[l]) * 7 - l * 100);
    always @(posedge clk) if (!dram_on) didx[l] <= 0; else if (dram_take[l]) didx[l] <= didx[l] + 1;
  end
  always @(posedge clk) npu_res_ready <= ($urandom % 3) != 0;
  int npu_next [NNL];
  always @(posedge clk) if (rst_n && npu_res_valid && npu_res_ready) begin
    acc_t e; int l, c;
    l = int'(npu_res_lane); c = int'(npu_res_col);
    e = acc_t'(c * 7 - l * 100);
    for (int s = 0; s < NSG; s++) e += seg_dot(wn[l][c * NSG + s], an[s]);
    checks++; n_npu_res++;
    if (c != npu_next[l] || npu_res_value != e) begin failures++; $display("FAIL: NPU lane %0d col %0d (exp col %0d) got %0d exp %0d", l, c, npu_next[l], npu_res_value, e); end
    npu_next[l] <= npu_next[l] + 1;
  end

  // ---------------- KV scheduler model ----------------
  logic [H-1:0] model; int ref_c; bit have_ref; int busy_cnt;
  always @(posedge clk) if (rst_n && npu_busy) busy_cnt++;

  task automatic decode_pass(input int ncols);
    int th, dc, k, cnt, i, lat;
    for (int l = 0; l < NNL; l++) for (int i2 = 0; i2 < NSG * ncols; i2++) wn[l][i2] = {$urandom, $urandom, $urandom, $urandom};
    for (int s = 0; s < NSG; s++) begin
      an[s] = {$urandom, $urandom, $urandom, $urandom};
      @(negedge clk); npu_in_we = 1; npu_in_waddr = 10'(s); npu_in_wdata = an[s];
    end
    @(negedge clk); npu_in_we = 0;
    for (int l = 0; l < NNL; l++) npu_next[l] = 0;
    npu_segs = NSG; npu_ncols = 16'(ncols); dram_on = 1;
    npu_start = 1; @(negedge clk); npu_start = 0;
    @(negedge clk);
    while (npu_busy) @(negedge clk);
    dram_on = 0;
    for (int l = 0; l < NNL; l++) begin
      checks++; if (npu_next[l] != ncols) begin failures++; $display("FAIL: NPU lane %0d gave %0d of %0d columns", l, npu_next[l], ncols); end
    end
    lat = busy_cnt; busy_cnt = 0;
    fwd_end = 1; @(negedge clk); fwd_end = 0;
    @(negedge clk);
    while (kv_busy) @(negedge clk);
    th = int'(kv_p / kv_u) * int'(kv_cnpu);
    if (!have_ref) begin ref_c = lat; have_ref = 1; end
    else begin
      dc = lat > ref_c ? lat - ref_c : 0;
      if (th != 0 && dc > th) begin
        k = (dc + th - 1) / th; cnt = 0; i = H - 1;
        while (cnt < k && i >= 0) begin if (model[i]) begin model[i] = 0; cnt++; end i--; end
        have_ref = 0;
      end
    end
    checks++;
    if (dut.bitmap != model) begin failures++; $display("FAIL: bitmap differs from Algorithm 2 after a pass of %0d busy cycles", lat); end
  endtask

  // ---------------- dispatcher ----------------
  always @(posedge clk) disp_npu_ready  <= ($urandom % 2) != 0;
  always @(posedge clk) disp_nand_ready <= ($urandom % 2) != 0;
  always @(posedge clk) if (rst_n) begin
    if (disp_npu_valid && disp_npu_ready) begin
      n_disp_npu++; checks++;
      if (!model[disp_npu_col]) begin failures++; $display("FAIL: column %0d sent to the NPU", disp_npu_col); end
    end
    if (disp_nand_valid && disp_nand_ready) begin
      n_disp_nand++; checks++;
      if (model[disp_nand_col]) begin failures++; $display("FAIL: column %0d sent to the NAND side", disp_nand_col); end
    end
  end

  initial begin
    start = 0; act_we = 0; gb_h_we = 0; prog_we = 0; start_page = 0; prog_page = 0; cfg_segs = 0; cfg_ncols = 0;
    cfg_bias_base = 0; cfg_res_base = 0; gb_h_addr = 0; act_waddr = 0; act_wdata = '0; gb_h_wdata = 0;
    prog_cluster = 0; prog_plane = 0; prog_row = 0; prog_data = '0;
    for (int l = 0; l < NC; l++) xbar_sel[l] = 3'(l);
    npu_start = 0; npu_segs = 0; npu_ncols = 0; npu_in_we = 0; npu_in_waddr = 0; npu_in_wdata = '0; dram_on = 0;
    // P = 64 KiB of page buffer per cluster, u = 4 KiB per column, C_NPU = 1:
    // C_th = 16 cycles (small, so that updates occur within a short test)
    kv_p = 65536; kv_u = 4096; kv_cnpu = 1; fwd_end = 0; disp_start = 0;
    model = '1; have_ref = 0; busy_cnt = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);

    program_all();
    ffn_pass();
    $display("FFN pass: %0d cycles for %0d segments/lane; errors %0d corrected %0d check-bit-only %0d uncorrectable %0d stalls %0d reads %0d overlap %0d",
             stat_cycles, NS, stat_err, stat_corr, stat_same, stat_uncorr, stat_stall, stat_reads, n_overlap);
    checks++; if (stat_err != stat_corr) begin failures++; $display("FAIL: %0d errors but %0d corrections", stat_err, stat_corr); end

    for (int p = 0; p < 6; p++) decode_pass(4 + 10 * p);
    $display("decode: %0d bitmap updates, %0d columns moved, last dC %0d k %0d, %0d NPU results", n_upd, kv_moved, kv_last_dc, kv_last_k, n_npu_res);

    @(negedge clk); disp_start = 1; @(negedge clk); disp_start = 0;
    @(negedge clk);
    while (disp_busy) @(negedge clk);
    repeat (2) @(negedge clk);
    checks++;
    if (n_disp_npu + n_disp_nand != H || disp_n_npu != 32'(n_disp_npu) || disp_n_nand != 32'(n_disp_nand)) begin
      failures++; $display("FAIL: dispatched %0d + %0d columns (counters %0d %0d)", n_disp_npu, n_disp_nand, disp_n_npu, disp_n_nand); end

    // every mechanism must have happened
    checks++; if (stat_corr == 0)   begin failures++; $display("FAIL: no corrections"); end
    checks++; if (stat_same == 0)   begin failures++; $display("FAIL: no check-bit-only corrections"); end
    checks++; if (stat_uncorr == 0) begin failures++; $display("FAIL: no uncorrectable rows"); end
    checks++; if (stat_stall == 0)  begin failures++; $display("FAIL: no lane stalls"); end
    checks++; if (n_overlap == 0)   begin failures++; $display("FAIL: page reads never overlapped consumption"); end
    checks++; if (n_upd == 0)       begin failures++; $display("FAIL: bitmap never updated"); end
    checks++; if (n_disp_npu == 0)  begin failures++; $display("FAIL: nothing dispatched to the NPU"); end
    checks++; if (n_disp_nand == 0) begin failures++; $display("FAIL: nothing dispatched to the NAND side"); end
    $display("mechanisms: corrections %0d, check-bit-only %0d, uncorrectable %0d, stall cycles %0d, overlap cycles %0d, bitmap updates %0d, NPU columns %0d, NAND columns %0d",
             stat_corr, stat_same, stat_uncorr, stat_stall, n_overlap, n_upd, n_disp_npu, n_disp_nand);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (400000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
