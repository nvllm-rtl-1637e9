// cluster_prefetcher -- structured page prefetch for one plane cluster.
//
// FFN weights lie contiguously in a cluster's pages, so the read schedule
// of a layer is known in advance and needs no prediction: a job of n_segs
// segments starting at start_page reads ceil(n_segs / ROWS) consecutive
// pages, in address order (the earliest-needed page first). A new page
// read is issued as soon as the cluster's array is free, which with cache
// read is while the previous page is still streaming, so the cluster FIFO
// is filled ahead of the lane and sensing time is hidden. Rows are moved
// from the page buffers into the FIFO one segment per cycle while the FIFO
// has room; a correction stall in the lane only fills the FIFO and never
// reaches back into the read schedule. Rows of the last page beyond the
// job's segment count are discarded.
//
// Interface: start with start_page and n_segs; busy until all segments are
// in the FIFO; stat_reads counts page reads issued. The read-ahead policy
// follows the paper's description; its exact form is this design's.
module cluster_prefetcher #(
  parameter int unsigned ROWS  = 4096,
  parameter int unsigned PAGES = 262144,
  parameter int unsigned NS_W  = 24
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [$clog2(PAGES)-1:0] start_page,
  input  logic [NS_W-1:0]          n_segs,
  output logic                     busy,
  // plane cluster control
  output logic                     pf_rd,
  output logic [$clog2(PAGES)-1:0] pf_page,
  output logic                     pf_row,
  output logic                     pf_discard,
  input  logic                     cl_busy,
  input  logic                     cl_cache_valid,
  input  logic                     cl_fifo_full,
  output logic [31:0]              stat_reads
);
  localparam int unsigned PW = $clog2(PAGES);
  logic [NS_W-1:0] pages_left, segs_left;
  logic [PW-1:0]   next_pg;

  assign pf_rd      = (pages_left != 0) && !cl_busy;
  assign pf_page    = next_pg;
  assign pf_row     = cl_cache_valid && !cl_fifo_full && (segs_left != 0);
  assign pf_discard = cl_cache_valid && (segs_left == 0);
  assign busy       = (segs_left != 0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pages_left <= '0; segs_left <= '0; next_pg <= '0; stat_reads <= '0;
    end else if (start && !busy) begin
      pages_left <= NS_W'((n_segs + NS_W'(ROWS - 1)) / NS_W'(ROWS));
      segs_left  <= n_segs;
      next_pg    <= start_page;
    end else begin
      if (pf_rd) begin
        pages_left <= pages_left - 1'b1;
        next_pg    <= next_pg + 1'b1;
        stat_reads <= stat_reads + 1;
      end
      if (pf_row) segs_left <= segs_left - 1'b1;
    end
  end
endmodule
