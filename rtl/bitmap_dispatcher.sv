// bitmap_dispatcher -- sends each Q/K/V/O column to the NPU or the NAND side.
//
// On start it walks the scheduler's bitmap from column 0 to H-1 and emits
// each column index on one of two valid/ready streams: npu_* for a set bit,
// nand_* for a clear bit. One column per cycle when the chosen side is
// ready; the walk stalls otherwise. The bitmap is sampled at start, so a
// scheduler update during a walk applies from the next one. The paper only
// names a "bitmap-based dispatcher"; this form is this design's choice.
module bitmap_dispatcher #(
  parameter int unsigned H = 4096
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [H-1:0]         bitmap,
  output logic                 busy,
  output logic                 npu_valid,
  output logic [$clog2(H)-1:0] npu_col,
  input  logic                 npu_ready,
  output logic                 nand_valid,
  output logic [$clog2(H)-1:0] nand_col,
  input  logic                 nand_ready,
  output logic [31:0]          n_npu,
  output logic [31:0]          n_nand
);
  logic [H-1:0]         map_q;
  logic [$clog2(H)-1:0] i_q;
  logic                 run_q, fire;

  assign npu_valid  = run_q && map_q[i_q];
  assign nand_valid = run_q && !map_q[i_q];
  assign npu_col    = i_q;
  assign nand_col   = i_q;
  assign fire       = (npu_valid && npu_ready) || (nand_valid && nand_ready);
  assign busy       = run_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      map_q <= '0; i_q <= '0; run_q <= 1'b0; n_npu <= '0; n_nand <= '0;
    end else if (start && !run_q) begin
      map_q <= bitmap; i_q <= '0; run_q <= 1'b1; n_npu <= '0; n_nand <= '0;
    end else if (fire) begin
      if (npu_valid) n_npu <= n_npu + 1;
      else           n_nand <= n_nand + 1;
      if (i_q == $clog2(H)'(H - 1)) run_q <= 1'b0;
      i_q <= i_q + 1'b1;
    end
  end
endmodule
