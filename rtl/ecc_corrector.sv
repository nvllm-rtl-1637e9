// ecc_corrector -- multi-cycle corrector of one weight segment.
//
// One corrector of the shared corrector hub. It takes a segment that the
// lane checker flagged and repairs it one 32-bit plane row per cycle, so a
// segment takes one cycle to load and SUB_N = 4 cycles of work: out_valid
// rises five cycles after the accepting clock edge, and the result is
// held on the outputs until it is taken. Per row the SEC-DED syndrome is
// decoded: a single error in a data bit is flipped, a single error in a
// check bit leaves the data as read, and a double error is reported as
// uncorrectable (the data is then passed on unchanged).
//
// Interface: in_valid/in_ready accept {data, par, tag}; out_valid/out_ready
// return {data, changed, uncorrectable, tag}. changed is set when the
// corrected data differs from what was read. Working one row per cycle is
// this design's choice: the paper only calls the corrector multi-cycle.
module ecc_corrector
  import nv_pkg::*;
#(
  parameter int unsigned TAG_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  seg_t             in_data,
  input  par_t             in_par,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  input  logic             out_ready,
  output seg_t             out_data,
  output logic             out_changed,
  output logic             out_uncorr,
  output logic [TAG_W-1:0] out_tag
);
  typedef enum logic [1:0] {IDLE, WORK, DONE} state_e;
  state_e state;
  seg_t   data_q, orig_q;
  par_t   par_q;
  logic [$clog2(SUB_N)-1:0] row_q;
  logic   uncorr_q;
  logic [TAG_W-1:0] tag_q;

  // Correction of the row currently selected.
  sub_t        row_d, row_fix;
  logic [6:0]  syn;
  logic        row_bad;
  always_comb begin
    row_d   = data_q[row_q*SUB_W +: SUB_W];
    syn     = ham_syndrome(row_d, par_q[row_q*SUB_PW +: SUB_PW]);
    row_fix = row_d;
    row_bad = 1'b0;
    if (syn[6]) begin
      // single error: flip the data bit at the syndrome position, if any
      for (int unsigned i = 0; i < SUB_W; i++)
        if (ham_pos(i) == int'(syn[5:0])) row_fix[i] = ~row_d[i];
    end else if (syn[5:0] != 0) begin
      row_bad = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= IDLE;
      data_q   <= '0;
      orig_q   <= '0;
      par_q    <= '0;
      row_q    <= '0;
      uncorr_q <= 1'b0;
      tag_q    <= '0;
    end else begin
      unique case (state)
        IDLE: if (in_valid) begin
          data_q   <= in_data;
          orig_q   <= in_data;
          par_q    <= in_par;
          tag_q    <= in_tag;
          row_q    <= '0;
          uncorr_q <= 1'b0;
          state    <= WORK;
        end
        WORK: begin
          data_q[row_q*SUB_W +: SUB_W] <= row_fix;
          uncorr_q <= uncorr_q | row_bad;
          row_q    <= row_q + 1'b1;
          if (row_q == $clog2(SUB_N)'(SUB_N - 1)) state <= DONE;
        end
        DONE: if (out_ready) state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end

  assign in_ready    = (state == IDLE);
  assign out_valid   = (state == DONE);
  assign out_data    = data_q;
  assign out_changed = (data_q != orig_q);
  assign out_uncorr  = uncorr_q;
  assign out_tag     = tag_q;
endmodule
