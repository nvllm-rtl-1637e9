// cluster_fifo -- cluster-level FIFO (CF) between a plane cluster and a lane.
//
// The middle of the three buffering layers of weight delivery: page-buffer
// rows of a plane cluster are pushed here as whole segments, and the lane's
// fly-weight register pops them, so word-line read latency and
// sense-amplifier variation are absorbed before the compute pipeline. The
// paper gives a 512 KiB cache FIFO for the NAND CMOS; spread over 8 clusters
// that is 64 KiB, i.e. DEPTH = 4096 segments of 16 bytes, the default here.
//
// Standard synchronous FIFO, first-word-fall-through: rd_data is valid
// whenever empty is low; a push and a pop may happen in the same cycle.
// level counts the stored entries. Pushing when full or popping when empty
// is a protocol error and is asserted against.
module cluster_fifo #(
  parameter int unsigned W     = 156,
  parameter int unsigned DEPTH = 4096
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  logic [W-1:0]             wr_data,
  input  logic                     pop,
  output logic [W-1:0]             rd_data,
  output logic                     full,
  output logic                     empty,
  output logic [$clog2(DEPTH+1)-1:0] level
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;

  always_ff @(posedge clk) if (push) mem[wp] <= wr_data;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      level <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      level <= level + ($bits(level))'(push) - ($bits(level))'(pop);
    end
  end

  assign rd_data = mem[rp];
  assign empty   = (level == 0);
  assign full    = (level == ($bits(level))'(DEPTH));

  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
