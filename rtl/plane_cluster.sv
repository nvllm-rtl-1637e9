// plane_cluster -- a 2x2 plane cluster with its cluster FIFO.
//
// PLANES = k*k = 4 planes share one set of peripheral control: a read
// command goes to all of them with the same page address, and a row read
// takes one page-buffer row from each plane in the same cycle. The four
// 32-bit rows side by side form one D = 16-byte weight segment with its
// 28-bit parity segment (plane p supplies data bits [32p+31:32p] and
// check bits [7p+6:7p]). So the cluster delivers exactly the width one
// PE lane consumes per cycle, which is the plane-lane co-alignment of the
// design, and no reshaping is needed. Segments go into the cluster FIFO
// (first-word-fall-through, popped by the lane side).
//
// The cluster itself is passive: the cluster_prefetcher decides when to
// read pages and when to move rows into the FIFO (pf_* inputs). prog_*
// loads one row of one plane (plane selected by prog_plane).
module plane_cluster
  import nv_pkg::*;
#(
  parameter int unsigned PLANES      = 4,
  parameter int unsigned PAGE_BYTES  = 16384,
  parameter int unsigned PAGES       = 262144,
  parameter int unsigned MODEL_PAGES = 2,
  parameter int unsigned T_READ      = 1792,
  parameter int unsigned CF_DEPTH    = 4096
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // from the prefetcher
  input  logic                          pf_rd,
  input  logic [$clog2(PAGES)-1:0]      pf_page,
  input  logic                          pf_row,
  input  logic                          pf_discard,
  output logic                          busy,
  output logic                          cache_valid,
  output logic                          fifo_full,
  // FIFO read side
  output wseg_t                         seg,
  output logic                          seg_valid,
  input  logic                          seg_pop,
  output logic [$clog2(CF_DEPTH+1)-1:0] level,
  // program path
  input  logic                          prog_we,
  input  logic [$clog2(PLANES)-1:0]     prog_plane,
  input  logic [$clog2(PAGES)-1:0]      prog_page,
  input  logic [$clog2(PAGE_BYTES/4)-1:0] prog_row,
  input  logic [38:0]                   prog_data
);
  logic [PLANES-1:0] p_busy, p_cv;
  logic [38:0]       p_row [PLANES];
  wseg_t             cat;

  for (genvar p = 0; p < PLANES; p++) begin : g_plane
    logic unused_last;
    nand_plane #(.PAGE_BYTES(PAGE_BYTES), .PAGES(PAGES), .MODEL_PAGES(MODEL_PAGES),
                 .T_READ(T_READ)) u_plane (
      .clk, .rst_n,
      .rd_cmd(pf_rd), .rd_page(pf_page), .busy(p_busy[p]), .cache_valid(p_cv[p]),
      .row_rd(pf_row), .discard(pf_discard), .row_data(p_row[p]), .row_last(unused_last),
      .prog_we(prog_we && prog_plane == $clog2(PLANES)'(p)), .prog_page, .prog_row, .prog_data);
    assign cat.data[p*SUB_W +: SUB_W]   = p_row[p][31:0];
    assign cat.par[p*SUB_PW +: SUB_PW]  = p_row[p][38:32];
  end

  assign busy        = |p_busy;
  assign cache_valid = &p_cv;

  logic empty;
  cluster_fifo #(.W($bits(wseg_t)), .DEPTH(CF_DEPTH)) u_cf (
    .clk, .rst_n, .push(pf_row), .wr_data(cat), .pop(seg_pop), .rd_data(seg),
    .full(fifo_full), .empty(empty), .level(level));
  assign seg_valid = !empty;

  // the planes of a cluster move in lock step
  assert property (@(posedge clk) disable iff (!rst_n) (p_cv == '0) || (p_cv == '1));
endmodule
