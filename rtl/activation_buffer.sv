// activation_buffer -- activation vector store of the NAND CMOS.
//
// 16 KiB (the paper's size) held as DEPTH = 1024 words of one D = 16-byte
// segment. The activation vector of the current layer is written once
// through the single write port (from the NPU / IO side); every PE lane
// then reads the activation segment matching its weight pointer through a
// read port of its own (NRP ports, combinational read, as a register file).
// The word organisation and the port count are this design's choice. The
// NPU reuses this module as its input buffer.
module activation_buffer
  import nv_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned NRP   = 8
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  seg_t                     wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr [NRP],
  output seg_t                     rdata [NRP]
);
  seg_t mem [DEPTH];
  always_ff @(posedge clk) if (we) mem[waddr] <= wdata;
  always_comb for (int i = 0; i < NRP; i++) rdata[i] = mem[raddr[i]];
endmodule
