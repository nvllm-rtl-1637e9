// tb_ffn_workload -- FFN columns of the evaluated model sizes on the full
// chip at its default parameters.
//
// A column's length is the FFN layer's input width: d for the up
// projection, 4d (OPT) for the down projection. The activation buffer
// holds 16 KiB = 1024 segments, so a longer column runs in chunks of at
// most 1024 segments: each chunk is one job, and its bias base points at
// the previous chunk's results, so partial sums chain through the global
// buffer. Every chunk starts on a page boundary of its cluster. Run here:
//   * OPT-30B down projection: 28672 weights = 1792 segments, 2 chunks of 896;
//   * OPT-1.3B up projection:  2048 weights = 128 segments, one chunk.
// Each lane computes 2 columns per case; results are compared with the
// full-length dot products of the clean weights. Isolated bit errors are
// injected into the stored rows throughout.
module tb_ffn_workload;
  import nv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NC = 8, ROWS = 4096, NCOL = 2;
  logic start, busy, done, act_we, gb_h_we, prog_we;
  logic [17:0] start_page, prog_page; logic [15:0] cfg_segs, cfg_ncols;
  logic [14:0] cfg_bias_base, cfg_res_base, gb_h_addr;
  logic [2:0] xbar_sel [NC]; logic [9:0] act_waddr; seg_t act_wdata;
  acc_t gb_h_wdata, gb_h_rdata; logic [2:0] prog_cluster; logic [1:0] prog_plane;
  logic [11:0] prog_row; logic [38:0] prog_data;
  logic [31:0] stat_err, stat_stall, stat_corr, stat_same, stat_uncorr, stat_cycles, stat_reads;
  logic npu_start, npu_busy, npu_in_we, npu_res_valid, npu_res_ready;
  logic [15:0] npu_segs, npu_ncols, npu_res_col; logic [3:0] dram_valid, dram_take;
  seg_t dram_seg [4]; logic [9:0] npu_in_waddr; seg_t npu_in_wdata;
  logic [15:0] npu_bias_addr [4]; acc_t npu_bias_data [4];
  logic [1:0] npu_res_lane; acc_t npu_res_value;
  logic [31:0] kv_p, kv_u, kv_cnpu, kv_last_dc, kv_last_k, kv_moved, disp_n_npu, disp_n_nand;
  logic fwd_end, kv_busy, kv_upd, disp_start, disp_busy, disp_npu_valid, disp_npu_ready, disp_nand_valid, disp_nand_ready;
  logic [11:0] disp_npu_col, disp_nand_col;

  nvllm_top dut (.*);

  localparam int MAXS = 1792;
  seg_t w [NC][NCOL][MAXS];   // w[lane][col][segment], clean
  seg_t act [MAXS];
  acc_t bias [NC * NCOL];

  // chunk j of a column of len segments: segments [j*cs, j*cs+cs) on page j
  task automatic run_case(input string name, input int len, input int cs);
    int nch; nch = len / cs;
    for (int l = 0; l < NC; l++) for (int c = 0; c < NCOL; c++) for (int s = 0; s < len; s++)
      w[l][c][s] = {$urandom, $urandom, $urandom, $urandom};
    for (int s = 0; s < len; s++) act[s] = {$urandom, $urandom, $urandom, $urandom};
    // program: cluster l (identity crossbar) page j row c*cs + s holds w[l][c][j*cs + s]
    for (int l = 0; l < NC; l++) for (int j = 0; j < nch; j++) for (int c = 0; c < NCOL; c++)
      for (int s = 0; s < cs; s++) for (int p = 0; p < 4; p++) begin
        sub_t d; subp_t k; int bd;
        d = w[l][c][j * cs + s][p*32 +: 32]; k = ham_encode(d); bd = $urandom % 32;
        if (($urandom % 300) == 0) d[bd] = ~d[bd];
        @(negedge clk);
        prog_we = 1; prog_cluster = 3'(l); prog_plane = 2'(p); prog_page = 18'(j);
        prog_row = 12'(c * cs + s); prog_data = {k, d};
      end
    @(negedge clk); prog_we = 0;
    for (int i = 0; i < NC * NCOL; i++) begin
      bias[i] = acc_t'($urandom % 4000) - 2000;
      @(negedge clk); gb_h_we = 1; gb_h_addr = 15'(i); gb_h_wdata = bias[i];
    end
    @(negedge clk); gb_h_we = 0;
    for (int j = 0; j < nch; j++) begin
      for (int s = 0; s < cs; s++) begin
        @(negedge clk); act_we = 1; act_waddr = 10'(s); act_wdata = act[j * cs + s];
      end
      @(negedge clk); act_we = 0;
      start_page = 18'(j); cfg_segs = 16'(cs); cfg_ncols = NCOL;
      cfg_bias_base = 15'(j * 1000); cfg_res_base = 15'((j + 1) * 1000);
      start = 1; @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      checks++;
      if (stat_cycles > 32'(NCOL * cs + 1792 + 200)) begin failures++; $display("FAIL: %s chunk %0d took %0d cycles", name, j, stat_cycles); end
    end
    for (int l = 0; l < NC; l++) for (int c = 0; c < NCOL; c++) begin
      acc_t e; e = bias[c * NC + l];
      for (int s = 0; s < len; s++) e += seg_dot(w[l][c][s], act[s]);
      gb_h_addr = 15'(nch * 1000 + c * NC + l);
      @(negedge clk);
      checks++;
      if (gb_h_rdata != e) begin failures++; if (failures < 6) $display("FAIL: %s lane %0d col %0d got %0d exp %0d", name, l, c, gb_h_rdata, e); end
    end
    $display("%s: column of %0d weights in %0d chunk(s), last chunk %0d cycles, corrections so far %0d",
             name, len * 16, nch, stat_cycles, stat_corr);
  endtask

  initial begin
    start = 0; act_we = 0; gb_h_we = 0; prog_we = 0; start_page = 0; prog_page = 0; cfg_segs = 0; cfg_ncols = 0;
    cfg_bias_base = 0; cfg_res_base = 0; gb_h_addr = 0; act_waddr = 0; act_wdata = '0; gb_h_wdata = 0;
    prog_cluster = 0; prog_plane = 0; prog_row = 0; prog_data = '0;
    for (int l = 0; l < NC; l++) xbar_sel[l] = 3'(l);
    npu_start = 0; npu_segs = 0; npu_ncols = 0; npu_in_we = 0; npu_in_waddr = 0; npu_in_wdata = '0;
    dram_valid = '0; for (int l = 0; l < 4; l++) begin dram_seg[l] = '0; npu_bias_data[l] = 0; end
    npu_res_ready = 1; kv_p = 0; kv_u = 1; kv_cnpu = 0; fwd_end = 0; disp_start = 0;
    disp_npu_ready = 1; disp_nand_ready = 1;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    run_case("OPT-30B down projection", 1792, 896);
    run_case("OPT-1.3B up projection", 128, 128);
    checks++; if (stat_corr == 0) begin failures++; $display("FAIL: no corrections"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (400000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
