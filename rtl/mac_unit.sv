// mac_unit -- d-wide INT8 multiply and adder tree of a PE lane.
//
// D = 16 signed 8-bit multipliers (a0*b0 .. a15*b15), an adder tree and a
// bias multiplexer. The bias of the output column is added only on the
// column's last segment (ptr == len(w)-1 in the paper's figure), so a
// column's result is w.a + bias once all segments are accumulated.
// mask_i is the data mask in front of the lane: a segment the checker has
// flagged is masked to zero so that nothing wrong is accumulated; the bias
// still enters on the last segment.
//
// Combinational; the accumulator register that closes the loop lives in the
// lane's commit buffer. INT8 only: the paper also lists BF16 execution, which
// this unit does not implement.
module mac_unit
  import nv_pkg::*;
(
  input  seg_t w_i,
  input  seg_t a_i,
  input  logic mask_i,
  input  logic last_i,
  input  acc_t bias_i,
  output acc_t sum_o
);
  logic signed [15:0] prod [D];
  acc_t tree;

  always_comb begin
    for (int i = 0; i < D; i++)
      prod[i] = $signed(w_i[i*WB +: WB]) * $signed(a_i[i*WB +: WB]);
    tree = '0;
    for (int i = 0; i < D; i++)
      tree += ACC_W'(prod[i]);
    sum_o = (mask_i ? acc_t'(0) : tree) + (last_i ? bias_i : acc_t'(0));
  end
endmodule
