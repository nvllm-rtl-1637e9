// npu -- dot-product path of the DRAM-side NPU.
//
// The NPU runs attention and the share of the Q/K/V/O projections that the
// KV-cache-aware scheduler leaves to it, with its weights in LPDDR5X DRAM.
// Its dot-product unit is NL = 4 OoO-ECDP lanes without ECC (the DRAM data
// needs no in-line correction), the same lane design as the NAND side with
// the checker removed. The weight segments arrive on one stream per lane
// from the LPDDR controller (dram_*), the activation vector sits in an input
// buffer (an activation_buffer) written through in_*; lane l computes
// output columns l, l+4, ... and results leave one per cycle through a
// round-robin arbiter (res_*), tagged with lane and local column.
// busy is high while any lane works; the scheduler's latency estimator
// counts it. The SFU, the intermediate/output buffers and the LPDDR
// controller are outside this block: the paper gives them only as names.
module npu
  import nv_pkg::*;
#(
  parameter int unsigned NL     = 4,
  parameter int unsigned SEGS_W = 16,
  parameter int unsigned COL_W  = 16,
  parameter int unsigned ACT_AW = 10
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [SEGS_W-1:0]  cfg_segs,
  input  logic [COL_W-1:0]   cfg_ncols,
  output logic               busy,
  // weights from DRAM
  input  logic [NL-1:0]      dram_valid,
  input  seg_t               dram_seg  [NL],
  output logic [NL-1:0]      dram_take,
  // input (activation) buffer write
  input  logic               in_we,
  input  logic [ACT_AW-1:0]  in_waddr,
  input  seg_t               in_wdata,
  // bias per lane, local column index
  output logic [COL_W-1:0]   bias_addr [NL],
  input  acc_t               bias_data [NL],
  // results
  output logic               res_valid,
  output logic [$clog2(NL)-1:0] res_lane,
  output logic [COL_W-1:0]   res_col,
  output acc_t               res_value,
  input  logic               res_ready
);
  logic [NL-1:0]     idle, ready, r_valid, r_gnt;
  logic [ACT_AW-1:0] a_addr [NL];
  seg_t              a_data [NL];
  logic [COL_W-1:0]  r_col [NL];
  acc_t              r_val [NL];
  logic [NL-1:0]     unused_ev;

  activation_buffer #(.DEPTH(2**ACT_AW), .NRP(NL)) u_inbuf (
    .clk, .we(in_we), .waddr(in_waddr), .wdata(in_wdata), .raddr(a_addr), .rdata(a_data));

  for (genvar l = 0; l < NL; l++) begin : g_lane
    seg_t        unused_d, unused_a;
    par_t        unused_p;
    logic [1:0]  unused_s;
    logic [31:0] unused_e, unused_st;
    wseg_t       w;
    assign w.data = dram_seg[l];
    assign w.par  = '0;
    oo_ecdp #(.ECC_EN(1'b0), .SLOTS(4), .SEGS_W(SEGS_W), .COL_W(COL_W), .ACT_AW(ACT_AW)) u_lane (
      .clk, .rst_n, .start, .cfg_segs, .cfg_ncols, .idle(idle[l]),
      .in_valid(dram_valid[l]), .in_seg(w), .in_ready(ready[l]),
      .act_addr(a_addr[l]), .act_data(a_data[l]),
      .bias_addr(bias_addr[l]), .bias_data(bias_data[l]),
      .err_valid(unused_ev[l]), .err_data(unused_d), .err_par(unused_p), .err_act(unused_a),
      .err_slot(unused_s), .err_take(1'b0),
      .rep_valid(1'b0), .rep_data('0), .rep_act('0), .rep_slot('0),
      .res_valid(r_valid[l]), .res_col(r_col[l]), .res_value(r_val[l]),
      .res_ready(r_gnt[l] && res_ready),
      .stat_err(unused_e), .stat_stall(unused_st));
  end

  assign dram_take = dram_valid & ready;
  assign busy      = !(&idle);

  logic any;
  rr_arbiter #(.N(NL)) u_arb (.clk, .rst_n, .req(r_valid), .take(res_ready),
                              .gnt(r_gnt), .gnt_idx(res_lane), .any(any));
  assign res_valid = any;
  assign res_col   = r_col[res_lane];
  assign res_value = r_val[res_lane];
endmodule
