// ecc_checker -- inline bit-error detector of one weight segment.
//
// This is the "Checker" of the out-of-order dot-product algorithm: it only
// decides whether a raw segment read from the NAND page buffers is clean, it
// does not correct it. Correction is left to the shared, multi-cycle
// corrector hub, so detection stays small enough to sit inside every PE
// lane (one detector per lane, eight in the main configuration).
//
// The segment is four 32-bit plane rows, each with a 7-bit SEC-DED check
// word (nv_pkg). err is set when any row has a non-zero syndrome, that is
// any single or double bit error in data or check bits. Purely
// combinational; no clock.
module ecc_checker
  import nv_pkg::*;
(
  input  seg_t data_i,
  input  par_t par_i,
  output logic err_o
);
  logic [SUB_N-1:0] row_err;

  always_comb begin
    for (int k = 0; k < SUB_N; k++)
      row_err[k] = |ham_syndrome(data_i[k*SUB_W +: SUB_W], par_i[k*SUB_PW +: SUB_PW]);
    err_o = |row_err;
  end
endmodule
