// nand_plane -- behavioural model of one 3D NAND plane and its page buffer.
//
// BEHAVIOURAL MODEL: the NAND cell array is analog and process-specific, so
// this file only reproduces what the CMOS logic sees of a plane. It is
// clocked and synthesizable in form, but stands for a flash array, not for
// logic to be built.
//
// A page is PAGE_BYTES = 16 KiB of weights, read out as ROWS = 4096 page-
// buffer rows of 32 data bits, each row with its 7 ECC check bits from the
// spare area ({check[6:0], data[31:0]}). rd_cmd starts sensing page rd_page;
// after T_READ cycles (5.12 us at the 350 MHz NAND CMOS clock) the page
// moves to the cache register as soon as that is free, which also frees
// the array for the next read (cache read). busy is high while sensing or
// while a sensed page waits for the cache. While cache_valid is high,
// row_data is the current row and row_rd advances to the next one; reading
// the last row, or discard, empties the cache.
//
// Storage: the full plane has PAGES pages; the model stores MODEL_PAGES of
// them and folds the page address onto those. prog_* writes one row of the
// stored pages directly (the program time is not modelled).
module nand_plane #(
  parameter int unsigned PAGE_BYTES  = 16384,
  parameter int unsigned PAGES       = 262144,
  parameter int unsigned MODEL_PAGES = 2,
  parameter int unsigned T_READ      = 1792
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          rd_cmd,
  input  logic [$clog2(PAGES)-1:0]      rd_page,
  output logic                          busy,
  output logic                          cache_valid,
  input  logic                          row_rd,
  input  logic                          discard,
  output logic [38:0]                   row_data,
  output logic                          row_last,
  input  logic                          prog_we,
  input  logic [$clog2(PAGES)-1:0]      prog_page,
  input  logic [$clog2(PAGE_BYTES/4)-1:0] prog_row,
  input  logic [38:0]                   prog_data
);
  localparam int unsigned ROWS = PAGE_BYTES / 4;
  localparam int unsigned RW   = $clog2(ROWS);
  localparam int unsigned PW   = $clog2(PAGES);
  localparam int unsigned MW   = (MODEL_PAGES > 1) ? $clog2(MODEL_PAGES) : 1;

  logic [38:0] mem [MODEL_PAGES * ROWS];

  logic          sensing, sensed;
  logic [31:0]   t_cnt;
  logic [MW-1:0] sense_pg, cache_pg;
  logic [RW-1:0] row_q;

  function automatic logic [MW-1:0] fold(input logic [PW-1:0] p);
    return MW'(p % PW'(MODEL_PAGES));
  endfunction

  assign busy     = sensing || sensed;
  assign row_data = mem[int'(cache_pg) * ROWS + int'(row_q)];
  assign row_last = (row_q == RW'(ROWS - 1));

  always_ff @(posedge clk) begin
    if (prog_we) mem[int'(fold(prog_page)) * ROWS + int'(prog_row)] <= prog_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sensing <= 1'b0; sensed <= 1'b0; t_cnt <= '0; sense_pg <= '0;
      cache_valid <= 1'b0; cache_pg <= '0; row_q <= '0;
    end else begin
      if (rd_cmd && !busy) begin
        sensing  <= 1'b1;
        sense_pg <= fold(rd_page);
        t_cnt    <= 32'(T_READ - 1);
      end
      if (sensing) begin
        if (t_cnt == 0) begin sensing <= 1'b0; sensed <= 1'b1; end
        else t_cnt <= t_cnt - 1;
      end
      // cache register
      if (cache_valid && (discard || (row_rd && row_last))) cache_valid <= 1'b0;
      else if (cache_valid && row_rd) row_q <= row_q + 1'b1;
      if (sensed && (!cache_valid || discard || (row_rd && row_last))) begin
        sensed      <= 1'b0;
        cache_valid <= 1'b1;
        cache_pg    <= sense_pg;
        row_q       <= '0;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) row_rd |-> cache_valid);
endmodule
