// tb_npu -- the four NPU lanes without ECC: weight segments arrive from a
// model DRAM stream with random gaps; activation loaded into the input
// buffer; every result (lane l, local column c) must equal w . a + bias.
module tb_npu;
  import nv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int SEGS = 6, NCOLS = 5;
  logic start, busy, in_we, res_valid, res_ready; logic [15:0] cfg_segs, cfg_ncols, res_col;
  logic [3:0] dram_valid, dram_take; seg_t dram_seg [4]; logic [9:0] in_waddr; seg_t in_wdata;
  logic [15:0] bias_addr [4]; acc_t bias_data [4]; logic [1:0] res_lane; acc_t res_value;
  npu dut (.*);
  seg_t w [4][SEGS*NCOLS]; seg_t act [SEGS]; acc_t bias [4][NCOLS];
  int idx [4]; int nres = 0; logic go;
  for (genvar l = 0; l < 4; l++) begin : g
    assign dram_seg[l] = w[l][idx[l] % (SEGS*NCOLS)];
    assign bias_data[l] = bias[l][bias_addr[l] % NCOLS];
    always @(posedge clk) begin
      if (!go) idx[l] <= 0;
      else if (dram_take[l]) idx[l] <= idx[l] + 1;
      dram_valid[l] <= go && (idx[l] + (dram_take[l] ? 1 : 0) < SEGS*NCOLS) && ($urandom % 4 != 0);
    end
  end
  always @(posedge clk) res_ready <= $urandom % 3 != 0;
  always @(posedge clk) if (rst_n && res_valid && res_ready) begin
    acc_t e; e = bias[res_lane][res_col];
    for (int s = 0; s < SEGS; s++) e += seg_dot(w[res_lane][res_col*SEGS + s], act[s]);
    checks++; if (res_value != e) begin failures++; $display("FAIL: lane %0d col %0d", res_lane, res_col); end
    nres++;
  end
  initial begin
    go = 0; start = 0; in_we = 0; in_waddr = 0; in_wdata = 0; cfg_segs = SEGS; cfg_ncols = NCOLS;
    for (int l = 0; l < 4; l++) begin
      for (int i = 0; i < SEGS*NCOLS; i++) w[l][i] = {$urandom, $urandom, $urandom, $urandom};
      for (int c = 0; c < NCOLS; c++) bias[l][c] = $urandom % 100;
    end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int s = 0; s < SEGS; s++) begin
      @(negedge clk); act[s] = {$urandom, $urandom, $urandom, $urandom}; in_we = 1; in_waddr = 10'(s); in_wdata = act[s];
    end
    @(negedge clk); in_we = 0; start = 1; @(negedge clk); start = 0; go = 1;
    @(negedge clk);
    while (busy) @(negedge clk);
    repeat (5) @(negedge clk);
    checks++; if (nres != 4 * NCOLS) begin failures++; $display("FAIL: %0d results", nres); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
