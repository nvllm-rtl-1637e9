// rr_arbiter -- round-robin arbiter.
//
// Used where several PE lanes compete for one shared resource: the lanes'
// faulty segments going to the scoreboard (the "Arbiter" of the ERDPE), the
// corrector outputs going back through the hub's router, and the lanes'
// committed results going to the global buffer. The paper names the arbiter
// but not its policy; round robin is this design's choice.
//
// gnt is a one-hot combinational grant among the set req bits, starting
// the search one past the last granted requester. The priority pointer
// moves only when take is high (the granted request was consumed), so a
// grant is stable while the winner waits.
module rr_arbiter #(
  parameter int unsigned N = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 take,
  output logic [N-1:0]         gnt,
  output logic [$clog2(N)-1:0] gnt_idx,
  output logic                 any
);
  localparam int unsigned IW = $clog2(N);
  logic [IW-1:0] last_q;

  always_comb begin
    gnt     = '0;
    gnt_idx = '0;
    any     = 1'b0;
    for (int unsigned k = 1; k <= N; k++) begin
      logic [IW-1:0] j;
      j = IW'((int'(last_q) + k) % N);
      if (!any && req[j]) begin
        any        = 1'b1;
        gnt[j]     = 1'b1;
        gnt_idx    = IW'(j);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n)           last_q <= IW'(N - 1);
    else if (take && any) last_q <= gnt_idx;
  end

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
  assert property (@(posedge clk) disable iff (!rst_n) (gnt & ~req) == '0);
endmodule
