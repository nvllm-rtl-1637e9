// erdpe_scoreboard -- tracks segments that wait for correction.
//
// Shared by all PE lanes of the ERDPE. Each entry holds what the paper's
// entry format shows, a valid bit (1: pending, 0: corrected) with the
// weight segment and its parity segment, plus the owning lane, its commit
// slot and the activation segment the weights must be multiplied with.
//   * Allocate: the lane arbiter hands over one faulty segment per cycle
//     (in_*); in_ready is low when all ENTRIES are in use, which in turn
//     stalls a lane whose faulty buffer cannot drain.
//   * Dispatcher: the lowest pending, not yet issued entry is sent to the
//     corrector hub when a corrector is free.
//   * The hub writes the corrected segment back and clears the valid bit.
//   * Router: one corrected entry per cycle is returned to its lane's
//     replay port (rep_*), and the entry is removed.
// pending_any is the OR of all valid bits: the ERDPE is not finished while
// it is set. stat_same counts corrections that left the weights as read
// (error in a check bit only), stat_uncorr uncorrectable segments.
// ENTRIES and the lowest-index policies are this design's choices.
module erdpe_scoreboard
  import nv_pkg::*;
#(
  parameter int unsigned NL      = 8,
  parameter int unsigned ENTRIES = 8,
  parameter int unsigned SW      = 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // allocate (from the lane arbiter)
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [$clog2(NL)-1:0] in_lane,
  input  logic [SW-1:0]         in_slot,
  input  seg_t                  in_data,
  input  par_t                  in_par,
  input  seg_t                  in_act,
  // to / from the corrector hub
  output logic                  cq_valid,
  input  logic                  cq_ready,
  output seg_t                  cq_data,
  output par_t                  cq_par,
  output logic [$clog2(ENTRIES)-1:0] cq_tag,
  input  logic                  cr_valid,
  input  seg_t                  cr_data,
  input  logic                  cr_changed,
  input  logic                  cr_uncorr,
  input  logic [$clog2(ENTRIES)-1:0] cr_tag,
  // replay to the lanes
  output logic [NL-1:0]         rep_valid,
  output seg_t                  rep_data,
  output seg_t                  rep_act,
  output logic [SW-1:0]         rep_slot,
  // status
  output logic                  pending_any,
  output logic [31:0]           stat_corr,
  output logic [31:0]           stat_same,
  output logic [31:0]           stat_uncorr
);
  localparam int unsigned EW = $clog2(ENTRIES);

  logic              e_occ   [ENTRIES];
  logic              e_pend  [ENTRIES];
  logic              e_iss   [ENTRIES];
  logic [$clog2(NL)-1:0] e_lane [ENTRIES];
  logic [SW-1:0]     e_slot  [ENTRIES];
  seg_t              e_data  [ENTRIES];
  par_t              e_par   [ENTRIES];
  seg_t              e_act   [ENTRIES];

  logic          free_any, disp_any, ret_any;
  logic [EW-1:0] free_idx, disp_idx, ret_idx;
  always_comb begin
    free_any = 1'b0; free_idx = '0;
    disp_any = 1'b0; disp_idx = '0;
    ret_any  = 1'b0; ret_idx  = '0;
    pending_any = 1'b0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (!e_occ[i])                          begin free_any = 1'b1; free_idx = EW'(i); end
      if (e_occ[i] && e_pend[i] && !e_iss[i]) begin disp_any = 1'b1; disp_idx = EW'(i); end
      if (e_occ[i] && !e_pend[i])             begin ret_any  = 1'b1; ret_idx  = EW'(i); end
      pending_any |= e_occ[i];
    end
  end

  assign in_ready = free_any;
  assign cq_valid = disp_any;
  assign cq_data  = e_data[disp_idx];
  assign cq_par   = e_par[disp_idx];
  assign cq_tag   = disp_idx;

  assign rep_valid = ret_any ? (NL'(1) << e_lane[ret_idx]) : '0;
  assign rep_data  = e_data[ret_idx];
  assign rep_act   = e_act[ret_idx];
  assign rep_slot  = e_slot[ret_idx];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) begin
        e_occ[i] <= 1'b0; e_pend[i] <= 1'b0; e_iss[i] <= 1'b0; e_lane[i] <= '0;
        e_slot[i] <= '0; e_data[i] <= '0; e_par[i] <= '0; e_act[i] <= '0;
      end
      stat_corr <= '0; stat_same <= '0; stat_uncorr <= '0;
    end else begin
      if (ret_any) e_occ[ret_idx] <= 1'b0;
      if (cq_valid && cq_ready) e_iss[disp_idx] <= 1'b1;
      if (cr_valid) begin
        e_pend[cr_tag] <= 1'b0;
        e_data[cr_tag] <= cr_data;
        stat_corr <= stat_corr + 1;
        if (!cr_changed) stat_same   <= stat_same + 1;
        if (cr_uncorr)   stat_uncorr <= stat_uncorr + 1;
      end
      if (in_valid && free_any) begin
        e_occ[free_idx]  <= 1'b1;
        e_pend[free_idx] <= 1'b1;
        e_iss[free_idx]  <= 1'b0;
        e_lane[free_idx] <= in_lane;
        e_slot[free_idx] <= in_slot;
        e_data[free_idx] <= in_data;
        e_par[free_idx]  <= in_par;
        e_act[free_idx]  <= in_act;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) cr_valid |-> e_occ[cr_tag] && e_pend[cr_tag] && e_iss[cr_tag]);
endmodule
