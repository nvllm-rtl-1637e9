// kv_scheduler -- KV-cache-aware NAND/NPU split of the Q/K/V/O columns.
//
// As the KV cache grows, the NPU's attention work per token grows and the
// shared Q/K/V/O projections fall behind. This block keeps a bitmap B of H
// projection columns (1: computed on the NPU, 0: moved to the in-Flash
// ERDPE) and updates it at the end of every forward pass (fwd_end), as in
// the paper's Algorithm 2:
//   C_th = floor(P / u) * C_NPU
//   if dC <= C_th: keep B
//   else k = ceil(dC / C_th); clear the k highest set bits of B.
// P is the page-buffer bytes per plane cluster, u the bytes of one weight
// column, C_NPU the NPU cycles per column.
//
// Latency estimator (this design's choice of the paper's "lightweight
// latency estimator"): it counts the cycles npu_busy is high during a
// forward pass. dC is that count minus the count of the pass after which
// B last changed (the first pass sets the reference); after a change the
// reference is re-taken from the next pass. B resets to all ones: at the
// start of decoding all attention runs on the NPU.
//
// Timing: two cycles for the two divisions, then one bitmap bit per cycle
// from H-1 down until k bits are cleared or bit 0 is passed; busy is high
// meanwhile and upd pulses when B has been written. fwd_end while busy is
// ignored. If floor(P/u) = 0 no column fits a page buffer and B is kept.
module kv_scheduler #(
  parameter int unsigned H = 4096
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [31:0]          cfg_p,
  input  logic [31:0]          cfg_u,
  input  logic [31:0]          cfg_cnpu,
  input  logic                 npu_busy,
  input  logic                 fwd_end,
  output logic [H-1:0]         bitmap,
  output logic                 busy,
  output logic                 upd,
  output logic [31:0]          last_dc,
  output logic [31:0]          last_k,
  output logic [31:0]          stat_moved
);
  typedef enum logic [2:0] {S_IDLE, S_TH, S_K, S_SCAN} state_e;
  state_e state;

  logic [31:0] cyc, ref_c, dc_q, cth_q, k_q, cnt_q;
  logic        ref_valid, rebase;
  logic [$clog2(H)-1:0] i_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE; cyc <= '0; ref_c <= '0; ref_valid <= 1'b0; rebase <= 1'b0;
      dc_q <= '0; cth_q <= '0; k_q <= '0; cnt_q <= '0; i_q <= '0;
      bitmap <= '1; upd <= 1'b0; last_dc <= '0; last_k <= '0; stat_moved <= '0;
    end else begin
      upd <= 1'b0;
      // latency estimator
      if (fwd_end) cyc <= '0;
      else if (npu_busy) cyc <= cyc + 1;

      unique case (state)
        S_IDLE: if (fwd_end) begin
          if (!ref_valid || rebase) begin
            ref_c     <= cyc;
            ref_valid <= 1'b1;
            rebase    <= 1'b0;
          end else begin
            dc_q  <= (cyc > ref_c) ? cyc - ref_c : '0;
            state <= S_TH;
          end
        end
        S_TH: begin
          cth_q   <= (cfg_u == 0) ? '0 : (cfg_p / cfg_u) * cfg_cnpu;
          last_dc <= dc_q;
          state   <= S_K;
        end
        S_K: begin
          if (cth_q == 0 || dc_q <= cth_q) begin
            last_k <= '0;
            state  <= S_IDLE;
          end else begin
            k_q    <= (dc_q + cth_q - 1) / cth_q;
            last_k <= (dc_q + cth_q - 1) / cth_q;
            cnt_q  <= '0;
            i_q    <= $clog2(H)'(H - 1);
            state  <= S_SCAN;
          end
        end
        S_SCAN: begin
          if (cnt_q == k_q) begin
            state <= S_IDLE; upd <= 1'b1; rebase <= 1'b1;
          end else begin
            if (bitmap[i_q]) begin
              bitmap[i_q] <= 1'b0;
              cnt_q       <= cnt_q + 1;
              stat_moved  <= stat_moved + 1;
            end
            if (i_q == 0) begin
              state <= S_IDLE; upd <= 1'b1; rebase <= 1'b1;
            end
            i_q <= i_q - 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
endmodule
