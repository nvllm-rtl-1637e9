// global_buffer -- 72 KiB global buffer of the NAND CMOS.
//
// DEPTH = 18432 words of 32 bits (72 KiB, the paper's size). It holds the
// bias of every output column and the committed dot-product results:
//   * NRP combinational read ports give each lane the bias of the column
//     it is starting;
//   * one write port takes committed results from the ERDPE controller;
//   * a host port reads (one-cycle latency) and writes (bias loading,
//     result read-out); the ERDPE write wins if both write one cycle.
// What the buffer holds and its port structure are this design's choice:
// the paper gives only the size.
module global_buffer
  import nv_pkg::*;
#(
  parameter int unsigned DEPTH = 18432,
  parameter int unsigned NRP   = 8
) (
  input  logic                     clk,
  input  logic [$clog2(DEPTH)-1:0] raddr [NRP],
  output acc_t                     rdata [NRP],
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  acc_t                     wdata,
  input  logic                     h_we,
  input  logic [$clog2(DEPTH)-1:0] h_addr,
  input  acc_t                     h_wdata,
  output acc_t                     h_rdata
);
  acc_t mem [DEPTH];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    else if (h_we) mem[h_addr] <= h_wdata;
    h_rdata <= mem[h_addr];
  end
  always_comb for (int i = 0; i < NRP; i++) rdata[i] = mem[raddr[i]];
endmodule
