// oo_ecdp -- out-of-order error-corrected dot-product lane (OoO-ECDP).
//
// One PE lane of the ERDPE. It computes, for each of cfg_ncols weight
// columns in turn, s = w . a + bias over cfg_segs segments of D = 16 INT8
// weights, reading the weights raw from its cluster FIFO. Every segment is
// checked inline as it leaves the fly-weight register:
//   * clean   -> MAC unit #0 adds w_d . a_d to the column's partial sum;
//   * faulty  -> the segment is masked (adds nothing), counted as pending
//                in the column's commit-buffer slot and parked in the
//                faulty buffer, from where the arbiter moves it with its
//                parity and activation to the ERDPE scoreboard. The lane
//                keeps consuming the next segment in the same cycle.
// A corrected segment returned by the scoreboard (rep_*) is multiplied by
// MAC unit #1 and added to its column's slot, whose pending count drops.
// Columns are retired strictly in order: the head slot commits once its
// last segment has passed and no correction is pending. This is the
// hardware form of the paper's Algorithm 1 (non-blocking correction, deferred
// accumulation of corrected segments).
//
// Timing: one segment per cycle whenever the FIFO has data, including
// cycles with an error, as long as the faulty buffer was emptied by the
// arbiter since the previous error. Only a second error while the faulty
// buffer is still occupied stalls the lane (stat_stall counts such cycles).
// A column may start only when its commit slot (column mod SLOTS) is free.
//
// Following the paper: fly-weight register, inline checker, two MAC units
// with data mask and bias on the last segment, commit buffer with a
// pending/valid scoreboard interface, in-order column completion. This
// design's choices: SLOTS, the one-entry faulty buffer, carrying the
// activation segment with the faulty segment, the counter widths.
// With ECC_EN = 0 the checker is left out (the NPU's OoO-ECDP w/o ECC).
module oo_ecdp
  import nv_pkg::*;
#(
  parameter bit          ECC_EN = 1'b1,
  parameter int unsigned SLOTS  = 4,
  parameter int unsigned SEGS_W = 16,
  parameter int unsigned COL_W  = 16,
  parameter int unsigned ACT_AW = 10,
  parameter int unsigned PEND_W = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // job
  input  logic              start,
  input  logic [SEGS_W-1:0] cfg_segs,
  input  logic [COL_W-1:0]  cfg_ncols,
  output logic              idle,
  // weight stream from the cluster FIFO
  input  logic              in_valid,
  input  wseg_t             in_seg,
  output logic              in_ready,
  // activation buffer read port (combinational)
  output logic [ACT_AW-1:0] act_addr,
  input  seg_t              act_data,
  // bias read port (combinational), lane-local column index
  output logic [COL_W-1:0]  bias_addr,
  input  acc_t              bias_data,
  // faulty segment to the scoreboard arbiter
  output logic              err_valid,
  output seg_t              err_data,
  output par_t              err_par,
  output seg_t              err_act,
  output logic [$clog2(SLOTS)-1:0] err_slot,
  input  logic              err_take,
  // corrected segment back from the scoreboard
  input  logic              rep_valid,
  input  seg_t              rep_data,
  input  seg_t              rep_act,
  input  logic [$clog2(SLOTS)-1:0] rep_slot,
  // committed results, in column order
  output logic              res_valid,
  output logic [COL_W-1:0]  res_col,
  output acc_t              res_value,
  input  logic              res_ready,
  // statistics
  output logic [31:0]       stat_err,
  output logic [31:0]       stat_stall
);
  localparam int unsigned SW = $clog2(SLOTS);

  // ---------------- job counters ----------------
  logic [SEGS_W-1:0] segs_q, ptr_q;
  logic [COL_W-1:0]  ncols_q, col_q;
  logic              run_q;

  // ---------------- fly-weight register ----------------
  logic              f_valid;
  wseg_t             f_seg;
  seg_t              f_act;
  acc_t              f_bias;
  logic              f_last;
  logic [SW-1:0]     f_slot;

  // ---------------- faulty buffer ----------------
  logic              h_valid;
  seg_t              h_data, h_act;
  par_t              h_par;
  logic [SW-1:0]     h_slot;

  // ---------------- commit buffer ----------------
  logic              s_busy [SLOTS];
  logic              s_done [SLOTS];
  logic [PEND_W-1:0] s_pend [SLOTS];
  logic [COL_W-1:0]  s_col  [SLOTS];
  acc_t              s_psum [SLOTS];
  logic [SW-1:0]     c_slot;

  // ---------------- check and MAC ----------------
  logic f_err;
  generate
    if (ECC_EN) begin : g_chk
      ecc_checker u_chk (.data_i(f_seg.data), .par_i(f_seg.par), .err_o(f_err));
    end else begin : g_nochk
      assign f_err = 1'b0;
    end
  endgenerate

  acc_t mac0, mac1;
  mac_unit u_mac0 (.w_i(f_seg.data), .a_i(f_act), .mask_i(f_err), .last_i(f_last),
                   .bias_i(f_bias), .sum_o(mac0));
  mac_unit u_mac1 (.w_i(rep_data), .a_i(rep_act), .mask_i(1'b0), .last_i(1'b0),
                   .bias_i('0), .sum_o(mac1));

  // F leaves this cycle: clean segments always, faulty ones if the faulty
  // buffer is free or being emptied now.
  logic h_free, f_adv, accept, new_col_ok;
  logic [SW-1:0] in_slot;
  assign h_free     = !h_valid || err_take;
  assign f_adv      = f_valid && (!f_err || h_free);
  assign in_slot    = SW'(col_q % COL_W'(SLOTS));
  assign new_col_ok = (ptr_q != 0) || !s_busy[in_slot];
  assign in_ready   = run_q && (!f_valid || f_adv) && new_col_ok;
  assign accept     = in_valid && in_ready;
  assign act_addr   = ACT_AW'(ptr_q);
  assign bias_addr  = col_q;

  // commit
  assign res_valid = s_busy[c_slot] && s_done[c_slot] && (s_pend[c_slot] == 0);
  assign res_col   = s_col[c_slot];
  assign res_value = s_psum[c_slot];
  logic commit;
  assign commit = res_valid && res_ready;

  assign err_valid = h_valid;
  assign err_data  = h_data;
  assign err_par   = h_par;
  assign err_act   = h_act;
  assign err_slot  = h_slot;

  logic any_busy;
  always_comb begin
    any_busy = 1'b0;
    for (int i = 0; i < SLOTS; i++) any_busy |= s_busy[i];
  end
  assign idle = !run_q && !f_valid && !h_valid && !any_busy;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run_q <= 1'b0; segs_q <= '0; ptr_q <= '0; ncols_q <= '0; col_q <= '0;
      f_valid <= 1'b0; f_seg <= '0; f_act <= '0; f_bias <= '0; f_last <= 1'b0; f_slot <= '0;
      h_valid <= 1'b0; h_data <= '0; h_act <= '0; h_par <= '0; h_slot <= '0;
      c_slot <= '0;
      stat_err <= '0; stat_stall <= '0;
      for (int i = 0; i < SLOTS; i++) begin
        s_busy[i] <= 1'b0; s_done[i] <= 1'b0; s_pend[i] <= '0; s_col[i] <= '0; s_psum[i] <= '0;
      end
    end else begin
      // job start
      if (start && !run_q) begin
        run_q   <= (cfg_ncols != 0) && (cfg_segs != 0);
        segs_q  <= cfg_segs;
        ncols_q <= cfg_ncols;
        ptr_q   <= '0;
        col_q   <= '0;
        c_slot  <= '0;   // column 0 of the new job uses slot 0
      end

      // faulty buffer drains to the arbiter
      if (h_valid && err_take) h_valid <= 1'b0;

      // fly-weight register
      if (f_adv) begin
        f_valid <= 1'b0;
        if (f_err) begin
          h_valid <= 1'b1;
          h_data  <= f_seg.data;
          h_par   <= f_seg.par;
          h_act   <= f_act;
          h_slot  <= f_slot;
          stat_err <= stat_err + 1;
        end
      end else if (f_valid) begin
        stat_stall <= stat_stall + 1;
      end
      if (accept) begin
        f_valid <= 1'b1;
        f_seg   <= in_seg;
        f_act   <= act_data;
        f_last  <= (ptr_q == segs_q - 1'b1);
        f_bias  <= bias_data;
        f_slot  <= in_slot;
        if (ptr_q == segs_q - 1'b1) begin
          ptr_q <= '0;
          col_q <= col_q + 1'b1;
          if (col_q == ncols_q - 1'b1) run_q <= 1'b0;
        end else begin
          ptr_q <= ptr_q + 1'b1;
        end
      end

      // commit buffer slots
      for (int i = 0; i < SLOTS; i++) begin
        acc_t          add;
        logic [PEND_W-1:0] pend;
        add  = '0;
        pend = s_pend[i];
        if (f_adv && f_slot == SW'(i)) begin
          add = add + mac0;
          if (f_err) pend = pend + 1'b1;
        end
        if (rep_valid && rep_slot == SW'(i)) begin
          add  = add + mac1;
          pend = pend - 1'b1;
        end
        s_psum[i] <= s_psum[i] + add;
        s_pend[i] <= pend;
        if (f_adv && f_slot == SW'(i) && f_last) s_done[i] <= 1'b1;
        if (accept && ptr_q == 0 && in_slot == SW'(i)) begin
          s_busy[i] <= 1'b1;
          s_done[i] <= 1'b0;
          s_pend[i] <= '0;
          s_psum[i] <= '0;
          s_col[i]  <= col_q;
        end
        if (commit && c_slot == SW'(i)) s_busy[i] <= 1'b0;
      end
      if (commit) c_slot <= (c_slot == SW'(SLOTS - 1)) ? '0 : c_slot + 1'b1;
    end
  end

  // a correction must target a column that is still open
  assert property (@(posedge clk) disable iff (!rst_n) rep_valid |-> s_busy[rep_slot] && s_pend[rep_slot] != 0);
  assert property (@(posedge clk) disable iff (!rst_n) err_valid && !err_take |=> err_valid && $stable(err_data));
endmodule
