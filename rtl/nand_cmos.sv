// nand_cmos -- the logic on the CMOS wafer bonded to the 3D NAND array.
//
// NC plane clusters of 2x2 planes, each with its cluster FIFO and page
// prefetcher, feed NL = NC OoO-ECDP lanes of the ERDPE through the
// crossbar. The 16 KiB activation buffer supplies every lane's activation
// segment, the 72 KiB global buffer the column biases, and it receives the
// committed results. FFN weights therefore go from the page buffers to the
// MACs without leaving the chip.
//
// One job (start) is one pass of the layer weights stored in the clusters:
// each cluster streams cfg_segs * cfg_ncols segments from page start_page
// on, and each lane computes cfg_ncols dot products of cfg_segs segments
// (output column c*NL + l for lane l, local column c). done pulses when
// every result is in the global buffer. The host side (the RISC-V global
// controller and the IO/DMA path in the paper, not modelled here) loads
// pages (prog_*), the activation vector (act_*) and biases, and reads results
// (gb_h_*). Structure per the paper's architecture figure; the host-side
// register interface is this design's.
module nand_cmos
  import nv_pkg::*;
#(
  parameter int unsigned NC          = 8,
  parameter int unsigned PLANES      = 4,
  parameter int unsigned PAGE_BYTES  = 16384,
  parameter int unsigned PAGES       = 262144,
  parameter int unsigned MODEL_PAGES = 2,
  parameter int unsigned T_READ      = 1792,
  parameter int unsigned CF_DEPTH    = 4096,
  parameter int unsigned NCORR       = 8,
  parameter int unsigned ENTRIES     = 8,
  parameter int unsigned ACT_DEPTH   = 1024,
  parameter int unsigned GB_DEPTH    = 18432,
  parameter int unsigned SEGS_W      = 16,
  parameter int unsigned COL_W       = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // job
  input  logic                          start,
  input  logic [$clog2(PAGES)-1:0]      start_page,
  input  logic [SEGS_W-1:0]             cfg_segs,
  input  logic [COL_W-1:0]              cfg_ncols,
  input  logic [$clog2(GB_DEPTH)-1:0]   cfg_bias_base,
  input  logic [$clog2(GB_DEPTH)-1:0]   cfg_res_base,
  input  logic [$clog2(NC)-1:0]         xbar_sel [NC],
  output logic                          busy,
  output logic                          done,
  // activation load
  input  logic                          act_we,
  input  logic [$clog2(ACT_DEPTH)-1:0]  act_waddr,
  input  seg_t                          act_wdata,
  // global buffer host port
  input  logic                          gb_h_we,
  input  logic [$clog2(GB_DEPTH)-1:0]   gb_h_addr,
  input  acc_t                          gb_h_wdata,
  output acc_t                          gb_h_rdata,
  // NAND program path
  input  logic                          prog_we,
  input  logic [$clog2(NC)-1:0]         prog_cluster,
  input  logic [$clog2(PLANES)-1:0]     prog_plane,
  input  logic [$clog2(PAGES)-1:0]      prog_page,
  input  logic [$clog2(PAGE_BYTES/4)-1:0] prog_row,
  input  logic [38:0]                   prog_data,
  // statistics
  output logic [31:0]                   stat_err,
  output logic [31:0]                   stat_stall,
  output logic [31:0]                   stat_corr,
  output logic [31:0]                   stat_same,
  output logic [31:0]                   stat_uncorr,
  output logic [31:0]                   stat_cycles,
  output logic [31:0]                   stat_reads
);
  localparam int unsigned NL    = NC;
  localparam int unsigned ROWS  = PAGE_BYTES / 4;
  localparam int unsigned GB_AW = $clog2(GB_DEPTH);
  localparam int unsigned AAW   = $clog2(ACT_DEPTH);
  localparam int unsigned NS_W  = SEGS_W + COL_W;

  wseg_t         cl_seg [NC];
  logic [NC-1:0] cl_valid, cl_pop, pf_busy;
  logic [31:0]   reads [NC];
  logic [NS_W-1:0] n_segs;
  assign n_segs = NS_W'(cfg_segs) * NS_W'(cfg_ncols);

  for (genvar c = 0; c < NC; c++) begin : g_cl
    logic                  pf_rd, pf_row, pf_discard, cb, cv, cff;
    logic [$clog2(PAGES)-1:0] pf_page;
    logic [$clog2(CF_DEPTH+1)-1:0] unused_level;
    cluster_prefetcher #(.ROWS(ROWS), .PAGES(PAGES), .NS_W(NS_W)) u_pf (
      .clk, .rst_n, .start, .start_page, .n_segs, .busy(pf_busy[c]),
      .pf_rd, .pf_page, .pf_row, .pf_discard,
      .cl_busy(cb), .cl_cache_valid(cv), .cl_fifo_full(cff), .stat_reads(reads[c]));
    plane_cluster #(.PLANES(PLANES), .PAGE_BYTES(PAGE_BYTES), .PAGES(PAGES),
                    .MODEL_PAGES(MODEL_PAGES), .T_READ(T_READ), .CF_DEPTH(CF_DEPTH)) u_cl (
      .clk, .rst_n, .pf_rd, .pf_page, .pf_row, .pf_discard,
      .busy(cb), .cache_valid(cv), .fifo_full(cff),
      .seg(cl_seg[c]), .seg_valid(cl_valid[c]), .seg_pop(cl_pop[c]), .level(unused_level),
      .prog_we(prog_we && prog_cluster == $clog2(NC)'(c)), .prog_plane, .prog_page,
      .prog_row, .prog_data);
  end

  wseg_t         ln_seg [NL];
  logic [NL-1:0] ln_valid, ln_take;
  crossbar #(.NC(NC), .NL(NL)) u_xbar (
    .clk, .rst_n, .sel(xbar_sel), .cl_seg, .cl_valid, .cl_pop,
    .ln_seg, .ln_valid, .ln_take);

  logic [AAW-1:0]   act_addr [NL];
  seg_t             act_data [NL];
  logic [GB_AW-1:0] bias_addr [NL];
  acc_t             bias_data [NL];
  logic             gb_we;
  logic [GB_AW-1:0] gb_waddr;
  acc_t             gb_wdata;
  logic             e_busy;

  activation_buffer #(.DEPTH(ACT_DEPTH), .NRP(NL)) u_act (
    .clk, .we(act_we), .waddr(act_waddr), .wdata(act_wdata), .raddr(act_addr), .rdata(act_data));

  global_buffer #(.DEPTH(GB_DEPTH), .NRP(NL)) u_gb (
    .clk, .raddr(bias_addr), .rdata(bias_data), .we(gb_we), .waddr(gb_waddr), .wdata(gb_wdata),
    .h_we(gb_h_we), .h_addr(gb_h_addr), .h_wdata(gb_h_wdata), .h_rdata(gb_h_rdata));

  erdpe #(.NL(NL), .NCORR(NCORR), .ENTRIES(ENTRIES), .SLOTS(4), .SEGS_W(SEGS_W),
          .COL_W(COL_W), .ACT_AW(AAW), .GB_AW(GB_AW)) u_erdpe (
    .clk, .rst_n, .start, .cfg_segs, .cfg_ncols, .cfg_bias_base, .cfg_res_base,
    .busy(e_busy), .done,
    .ln_seg, .ln_valid, .ln_take, .act_addr, .act_data, .bias_addr, .bias_data,
    .gb_we, .gb_waddr, .gb_wdata,
    .stat_err, .stat_stall, .stat_corr, .stat_same, .stat_uncorr, .stat_cycles);

  assign busy = e_busy || (|pf_busy);

  always_comb begin
    stat_reads = '0;
    for (int c = 0; c < NC; c++) stat_reads += reads[c];
  end
endmodule
