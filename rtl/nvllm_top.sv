// nvllm_top -- NVLLM: NAND-centric LLM inference chip, top level.
//
// Three parts, wired as in the paper's architecture:
//   * nand_cmos: the CMOS wafer under the 3D NAND array; runs the FFN layers
//     (and any Q/K/V/O columns moved to it) on raw page-buffer reads with
//     error-resilient out-of-order dot products.
//   * npu: the DRAM-side NPU dot-product unit (4 OoO-ECDP lanes w/o ECC)
//     for attention-side projections; its weights come from LPDDR5X
//     through the dram_* streams.
//   * kv_scheduler + bitmap_dispatcher: the KV-cache-aware split of the
//     Q/K/V/O columns between NPU and NAND side; the scheduler watches the
//     NPU busy time per forward pass (fwd_end marks the end of one) and the
//     dispatcher hands each column to one side on disp_* streams.
// Everything the paper takes from elsewhere is a port: the RISC-V global
// controller (job registers, start, fwd_end, dispatcher sinks), the LPDDR
// controller and DRAM (dram_*, npu_bias_*), the SFU and the IO/DMA path
// (act_*, npu_in_*, gb_h_*, npu_res_*), and the flash program path (prog_*).
// One clock domain: the paper runs the NAND CMOS at 350 MHz and the NPU at
// 500 MHz; a single clock is this design's simplification.
module nvllm_top
  import nv_pkg::*;
#(
  parameter int unsigned NC          = 8,
  parameter int unsigned MODEL_PAGES = 2,
  parameter int unsigned T_READ      = 1792,
  parameter int unsigned CF_DEPTH    = 4096,
  parameter int unsigned H           = 4096,
  parameter int unsigned NPU_NL      = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  // NAND-side job
  input  logic               start,
  input  logic [17:0]        start_page,
  input  logic [15:0]        cfg_segs,
  input  logic [15:0]        cfg_ncols,
  input  logic [14:0]        cfg_bias_base,
  input  logic [14:0]        cfg_res_base,
  input  logic [$clog2(NC)-1:0] xbar_sel [NC],
  output logic               busy,
  output logic               done,
  input  logic               act_we,
  input  logic [9:0]         act_waddr,
  input  seg_t               act_wdata,
  input  logic               gb_h_we,
  input  logic [14:0]        gb_h_addr,
  input  acc_t               gb_h_wdata,
  output acc_t               gb_h_rdata,
  input  logic               prog_we,
  input  logic [$clog2(NC)-1:0] prog_cluster,
  input  logic [1:0]         prog_plane,
  input  logic [17:0]        prog_page,
  input  logic [11:0]        prog_row,
  input  logic [38:0]        prog_data,
  output logic [31:0]        stat_err,
  output logic [31:0]        stat_stall,
  output logic [31:0]        stat_corr,
  output logic [31:0]        stat_same,
  output logic [31:0]        stat_uncorr,
  output logic [31:0]        stat_cycles,
  output logic [31:0]        stat_reads,
  // NPU
  input  logic               npu_start,
  input  logic [15:0]        npu_segs,
  input  logic [15:0]        npu_ncols,
  output logic               npu_busy,
  input  logic [NPU_NL-1:0]  dram_valid,
  input  seg_t               dram_seg [NPU_NL],
  output logic [NPU_NL-1:0]  dram_take,
  input  logic               npu_in_we,
  input  logic [9:0]         npu_in_waddr,
  input  seg_t               npu_in_wdata,
  output logic [15:0]        npu_bias_addr [NPU_NL],
  input  acc_t               npu_bias_data [NPU_NL],
  output logic               npu_res_valid,
  output logic [$clog2(NPU_NL)-1:0] npu_res_lane,
  output logic [15:0]        npu_res_col,
  output acc_t               npu_res_value,
  input  logic               npu_res_ready,
  // KV-cache-aware scheduling
  input  logic [31:0]        kv_p,
  input  logic [31:0]        kv_u,
  input  logic [31:0]        kv_cnpu,
  input  logic               fwd_end,
  output logic               kv_busy,
  output logic               kv_upd,
  output logic [31:0]        kv_last_dc,
  output logic [31:0]        kv_last_k,
  output logic [31:0]        kv_moved,
  input  logic               disp_start,
  output logic               disp_busy,
  output logic               disp_npu_valid,
  output logic [$clog2(H)-1:0] disp_npu_col,
  input  logic               disp_npu_ready,
  output logic               disp_nand_valid,
  output logic [$clog2(H)-1:0] disp_nand_col,
  input  logic               disp_nand_ready,
  output logic [31:0]        disp_n_npu,
  output logic [31:0]        disp_n_nand
);
  nand_cmos #(.NC(NC), .MODEL_PAGES(MODEL_PAGES), .T_READ(T_READ), .CF_DEPTH(CF_DEPTH)) u_nand (
    .clk, .rst_n, .start, .start_page, .cfg_segs, .cfg_ncols, .cfg_bias_base, .cfg_res_base,
    .xbar_sel, .busy, .done, .act_we, .act_waddr, .act_wdata,
    .gb_h_we, .gb_h_addr, .gb_h_wdata, .gb_h_rdata,
    .prog_we, .prog_cluster, .prog_plane, .prog_page, .prog_row, .prog_data,
    .stat_err, .stat_stall, .stat_corr, .stat_same, .stat_uncorr, .stat_cycles, .stat_reads);

  npu #(.NL(NPU_NL)) u_npu (
    .clk, .rst_n, .start(npu_start), .cfg_segs(npu_segs), .cfg_ncols(npu_ncols), .busy(npu_busy),
    .dram_valid, .dram_seg, .dram_take,
    .in_we(npu_in_we), .in_waddr(npu_in_waddr), .in_wdata(npu_in_wdata),
    .bias_addr(npu_bias_addr), .bias_data(npu_bias_data),
    .res_valid(npu_res_valid), .res_lane(npu_res_lane), .res_col(npu_res_col),
    .res_value(npu_res_value), .res_ready(npu_res_ready));

  logic [H-1:0] bitmap;
  kv_scheduler #(.H(H)) u_kv (
    .clk, .rst_n, .cfg_p(kv_p), .cfg_u(kv_u), .cfg_cnpu(kv_cnpu), .npu_busy, .fwd_end,
    .bitmap, .busy(kv_busy), .upd(kv_upd), .last_dc(kv_last_dc), .last_k(kv_last_k),
    .stat_moved(kv_moved));

  bitmap_dispatcher #(.H(H)) u_disp (
    .clk, .rst_n, .start(disp_start), .bitmap, .busy(disp_busy),
    .npu_valid(disp_npu_valid), .npu_col(disp_npu_col), .npu_ready(disp_npu_ready),
    .nand_valid(disp_nand_valid), .nand_col(disp_nand_col), .nand_ready(disp_nand_ready),
    .n_npu(disp_n_npu), .n_nand(disp_n_nand));
endmodule
