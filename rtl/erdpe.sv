// erdpe -- error-resilient dot-product engine (ERDPE).
//
// NL OoO-ECDP lanes working on raw NAND reads, sharing one error-handling
// back end:
//   lane faulty buffers --rr arbiter--> scoreboard --dispatcher-->
//   corrector hub (NCORR multi-cycle correctors) --router--> scoreboard
//   --router--> replay port of the owning lane.
// The controller starts the lanes and writes their committed results to the
// global buffer. A lane never waits for a correction: it continues with
// the next segment and the corrected one is accumulated later, so the MAC
// rate stays at one segment per lane per cycle under a non-zero bit error
// rate; only a burst of errors that fills the scoreboard or hits a lane
// whose faulty buffer is still full causes a stall.
//
// Lane l's bias read for its local column c goes to the global buffer at
// bias_base + c*NL + l, its activation read to segment ptr of the shared
// activation buffer. ECC_EN = 0 removes the checkers (then nothing reaches
// the back end). Structure per the paper's ERDPE figure; sizes of the
// scoreboard and commit buffer are this design's.
module erdpe
  import nv_pkg::*;
#(
  parameter int unsigned NL      = 8,
  parameter int unsigned NCORR   = 8,
  parameter int unsigned ENTRIES = 8,
  parameter int unsigned SLOTS   = 4,
  parameter int unsigned SEGS_W  = 16,
  parameter int unsigned COL_W   = 16,
  parameter int unsigned ACT_AW  = 10,
  parameter int unsigned GB_AW   = 15
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [SEGS_W-1:0] cfg_segs,
  input  logic [COL_W-1:0]  cfg_ncols,
  input  logic [GB_AW-1:0]  cfg_bias_base,
  input  logic [GB_AW-1:0]  cfg_res_base,
  output logic              busy,
  output logic              done,
  // weight streams, one per lane
  input  wseg_t             ln_seg   [NL],
  input  logic [NL-1:0]     ln_valid,
  output logic [NL-1:0]     ln_take,
  // activation buffer
  output logic [ACT_AW-1:0] act_addr [NL],
  input  seg_t              act_data [NL],
  // global buffer
  output logic [GB_AW-1:0]  bias_addr [NL],
  input  acc_t              bias_data [NL],
  output logic              gb_we,
  output logic [GB_AW-1:0]  gb_waddr,
  output acc_t              gb_wdata,
  // statistics
  output logic [31:0]       stat_err,
  output logic [31:0]       stat_stall,
  output logic [31:0]       stat_corr,
  output logic [31:0]       stat_same,
  output logic [31:0]       stat_uncorr,
  output logic [31:0]       stat_cycles
);
  localparam int unsigned SW = $clog2(SLOTS);
  localparam int unsigned EW = $clog2(ENTRIES);
  localparam int unsigned LW = $clog2(NL);

  logic              lane_start;
  logic [NL-1:0]     lane_idle, ln_ready;
  logic [NL-1:0]     e_valid, e_take;
  seg_t              e_data [NL], e_act [NL];
  par_t              e_par  [NL];
  logic [SW-1:0]     e_slot [NL];
  logic [NL-1:0]     rep_valid;
  seg_t              rep_data, rep_act;
  logic [SW-1:0]     rep_slot;
  logic [NL-1:0]     r_valid, r_ready;
  logic [COL_W-1:0]  r_col [NL], lb_addr [NL];
  acc_t              r_val [NL];
  logic [31:0]       l_err [NL], l_stall [NL];

  assign ln_take = ln_valid & ln_ready;

  for (genvar l = 0; l < NL; l++) begin : g_lane
    oo_ecdp #(.ECC_EN(1'b1), .SLOTS(SLOTS), .SEGS_W(SEGS_W), .COL_W(COL_W), .ACT_AW(ACT_AW)) u_lane (
      .clk, .rst_n,
      .start(lane_start), .cfg_segs, .cfg_ncols, .idle(lane_idle[l]),
      .in_valid(ln_valid[l]), .in_seg(ln_seg[l]), .in_ready(ln_ready[l]),
      .act_addr(act_addr[l]), .act_data(act_data[l]),
      .bias_addr(lb_addr[l]), .bias_data(bias_data[l]),
      .err_valid(e_valid[l]), .err_data(e_data[l]), .err_par(e_par[l]), .err_act(e_act[l]),
      .err_slot(e_slot[l]), .err_take(e_take[l]),
      .rep_valid(rep_valid[l]), .rep_data, .rep_act, .rep_slot,
      .res_valid(r_valid[l]), .res_col(r_col[l]), .res_value(r_val[l]), .res_ready(r_ready[l]),
      .stat_err(l_err[l]), .stat_stall(l_stall[l]));
    assign bias_addr[l] = GB_AW'(cfg_bias_base + GB_AW'(lb_addr[l]) * GB_AW'(NL) + GB_AW'(l));
  end

  // lane arbiter into the scoreboard
  logic [NL-1:0] e_gnt;
  logic [LW-1:0] e_idx;
  logic          e_any, sb_ready;
  rr_arbiter #(.N(NL)) u_err_arb (.clk, .rst_n, .req(e_valid), .take(sb_ready),
                                  .gnt(e_gnt), .gnt_idx(e_idx), .any(e_any));
  assign e_take = sb_ready ? e_gnt : '0;

  logic          cq_valid, cq_ready, cr_valid, cr_changed, cr_uncorr, sb_pending;
  seg_t          cq_data, cr_data;
  par_t          cq_par;
  logic [EW-1:0] cq_tag, cr_tag;

  erdpe_scoreboard #(.NL(NL), .ENTRIES(ENTRIES), .SW(SW)) u_sb (
    .clk, .rst_n,
    .in_valid(e_any), .in_ready(sb_ready), .in_lane(e_idx), .in_slot(e_slot[e_idx]),
    .in_data(e_data[e_idx]), .in_par(e_par[e_idx]), .in_act(e_act[e_idx]),
    .cq_valid, .cq_ready, .cq_data, .cq_par, .cq_tag,
    .cr_valid, .cr_data, .cr_changed, .cr_uncorr, .cr_tag,
    .rep_valid, .rep_data, .rep_act, .rep_slot,
    .pending_any(sb_pending), .stat_corr, .stat_same, .stat_uncorr);

  corrector_hub #(.NCORR(NCORR), .TAG_W(EW)) u_hub (
    .clk, .rst_n,
    .req_valid(cq_valid), .req_ready(cq_ready), .req_data(cq_data), .req_par(cq_par), .req_tag(cq_tag),
    .res_valid(cr_valid), .res_data(cr_data), .res_changed(cr_changed), .res_uncorr(cr_uncorr),
    .res_tag(cr_tag));

  erdpe_ctrl #(.NL(NL), .COL_W(COL_W), .GB_AW(GB_AW)) u_ctrl (
    .clk, .rst_n, .start, .cfg_res_base, .lane_start, .busy, .done,
    .lane_idle, .sb_pending, .res_valid(r_valid), .res_col(r_col), .res_value(r_val),
    .res_ready(r_ready), .gb_we, .gb_waddr, .gb_wdata, .stat_cycles);

  always_comb begin
    stat_err = '0; stat_stall = '0;
    for (int l = 0; l < NL; l++) begin
      stat_err   += l_err[l];
      stat_stall += l_stall[l];
    end
  end
endmodule
