// crossbar -- crossbar interconnect from cluster FIFOs to OoO-ECDP lanes.
//
// Each lane l takes its weight stream from cluster sel[l]. In the default,
// co-aligned mapping lane l reads cluster l; the crossbar lets the global
// controller remap lanes to clusters (for example around a faulty cluster
// or lane). The paper only names the crossbar; a one-source-per-lane
// multiplexer with a valid/pop handshake is this design's choice.
// Combinational. A cluster is popped when the lane that selects it takes
// a segment; the mapping must be one-to-one (asserted).
module crossbar
  import nv_pkg::*;
#(
  parameter int unsigned NC = 8,
  parameter int unsigned NL = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [$clog2(NC)-1:0] sel       [NL],
  input  wseg_t                 cl_seg    [NC],
  input  logic [NC-1:0]         cl_valid,
  output logic [NC-1:0]         cl_pop,
  output wseg_t                 ln_seg    [NL],
  output logic [NL-1:0]         ln_valid,
  input  logic [NL-1:0]         ln_take
);
  always_comb begin
    cl_pop = '0;
    for (int l = 0; l < NL; l++) begin
      ln_seg[l]   = cl_seg[sel[l]];
      ln_valid[l] = cl_valid[sel[l]];
      if (ln_take[l]) cl_pop[sel[l]] = 1'b1;
    end
  end

  // one-to-one mapping
  for (genvar a = 0; a < NL; a++) begin : g_a
    for (genvar b = a + 1; b < NL; b++) begin : g_b
      assert property (@(posedge clk) disable iff (!rst_n) sel[a] != sel[b]);
    end
  end
endmodule
