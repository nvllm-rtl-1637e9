// erdpe_ctrl -- ERDPE controller.
//
// Runs one job of the error-resilient dot-product engine: on start it
// latches the job and starts all lanes together; afterwards it collects the
// lanes' committed column results through a round-robin arbiter, one per
// cycle, and writes each into the global buffer at
//   res_base + col * NL + lane
// (lane l computes output columns l, l+NL, l+2NL, ... of the layer). The
// job is done when every lane is idle, no result is waiting and the
// scoreboard holds no entry; done pulses for one cycle and stat_cycles
// holds the job's length in cycles. The paper only names the controller;
// this sequencing and the column-to-lane interleaving are this design's.
module erdpe_ctrl
  import nv_pkg::*;
#(
  parameter int unsigned NL    = 8,
  parameter int unsigned COL_W = 16,
  parameter int unsigned GB_AW = 15
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [GB_AW-1:0]  cfg_res_base,
  output logic              lane_start,
  output logic              busy,
  output logic              done,
  input  logic [NL-1:0]     lane_idle,
  input  logic              sb_pending,
  input  logic [NL-1:0]     res_valid,
  input  logic [COL_W-1:0]  res_col   [NL],
  input  acc_t              res_value [NL],
  output logic [NL-1:0]     res_ready,
  output logic              gb_we,
  output logic [GB_AW-1:0]  gb_waddr,
  output acc_t              gb_wdata,
  output logic [31:0]       stat_cycles
);
  typedef enum logic [1:0] {S_IDLE, S_LAUNCH, S_RUN} state_e;
  state_e state;
  logic [GB_AW-1:0] res_base_q;
  logic [$clog2(NL)-1:0] g;
  logic any;

  rr_arbiter #(.N(NL)) u_arb (.clk, .rst_n, .req(res_valid), .take(1'b1),
                              .gnt(res_ready), .gnt_idx(g), .any(any));

  assign gb_we      = any;
  assign gb_waddr   = GB_AW'(res_base_q + GB_AW'(res_col[g]) * GB_AW'(NL) + GB_AW'(g));
  assign gb_wdata   = res_value[g];
  assign lane_start = (state == S_LAUNCH);
  assign busy       = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE; res_base_q <= '0; done <= 1'b0; stat_cycles <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          res_base_q  <= cfg_res_base;
          stat_cycles <= '0;
          state       <= S_LAUNCH;
        end
        S_LAUNCH: begin
          stat_cycles <= stat_cycles + 1;
          state       <= S_RUN;
        end
        S_RUN: begin
          stat_cycles <= stat_cycles + 1;
          if ((&lane_idle) && !sb_pending && (res_valid == '0)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
