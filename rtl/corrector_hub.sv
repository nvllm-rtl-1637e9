// corrector_hub -- shared pool of multi-cycle correctors with its router.
//
// Faulty segments from all PE lanes are corrected here, so the expensive
// correction logic is shared by the lanes instead of sitting in each of
// them. A request is accepted whenever one of the NCORR correctors is idle
// and goes to the lowest-numbered idle one. Finished corrections wait in
// their corrector until the router, a round-robin arbiter, returns them one
// per cycle to the scoreboard, tagged with the scoreboard entry number.
//
// Interface: req_valid/req_ready with {data, par, tag}; res_valid with
// {data, changed, uncorr, tag}, always accepted by the scoreboard.
// Latency: SUB_N cycles in a corrector plus at least one in the router.
// The pool of eight correctors is the paper's ("Corrector (x8)"); the
// dispatch and return policy is this design's.
module corrector_hub
  import nv_pkg::*;
#(
  parameter int unsigned NCORR = 8,
  parameter int unsigned TAG_W = 3
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req_valid,
  output logic             req_ready,
  input  seg_t             req_data,
  input  par_t             req_par,
  input  logic [TAG_W-1:0] req_tag,
  output logic             res_valid,
  output seg_t             res_data,
  output logic             res_changed,
  output logic             res_uncorr,
  output logic [TAG_W-1:0] res_tag
);
  logic [NCORR-1:0] c_in_ready, c_in_valid, c_out_valid, c_out_ready;
  seg_t             c_data    [NCORR];
  logic             c_changed [NCORR];
  logic             c_uncorr  [NCORR];
  logic [TAG_W-1:0] c_tag     [NCORR];

  // dispatch to the lowest idle corrector
  always_comb begin
    c_in_valid = '0;
    req_ready  = |c_in_ready;
    for (int i = NCORR - 1; i >= 0; i--)
      if (c_in_ready[i]) c_in_valid = NCORR'(req_valid) << i;
  end

  for (genvar i = 0; i < NCORR; i++) begin : g_corr
    ecc_corrector #(.TAG_W(TAG_W)) u_corr (
      .clk, .rst_n,
      .in_valid(c_in_valid[i]), .in_ready(c_in_ready[i]),
      .in_data(req_data), .in_par(req_par), .in_tag(req_tag),
      .out_valid(c_out_valid[i]), .out_ready(c_out_ready[i]),
      .out_data(c_data[i]), .out_changed(c_changed[i]), .out_uncorr(c_uncorr[i]),
      .out_tag(c_tag[i]));
  end

  // router back to the scoreboard
  logic [$clog2(NCORR)-1:0] sel;
  logic                     any;
  rr_arbiter #(.N(NCORR)) u_route (
    .clk, .rst_n, .req(c_out_valid), .take(1'b1), .gnt(c_out_ready), .gnt_idx(sel), .any(any));

  assign res_valid   = any;
  assign res_data    = c_data[sel];
  assign res_changed = c_changed[sel];
  assign res_uncorr  = c_uncorr[sel];
  assign res_tag     = c_tag[sel];
endmodule
