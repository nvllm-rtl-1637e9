// nv_pkg -- constants, types and ECC functions shared by the NVLLM RTL.
//
// A weight segment is D = 16 INT8 weights (128 bits), the width one PE lane
// consumes per cycle. A 2x2 plane cluster delivers one segment per step by
// concatenating one 32-bit page-buffer row from each of its four planes.
// Each 32-bit plane row carries its own 7-bit SEC-DED Hamming check word
// (39,32) in the plane's spare area, so a segment travels with a 28-bit
// parity segment (n-d bits in the paper's notation). The segment width and
// the 2x2 cluster follow the paper; the code itself is this design's choice,
// as the paper does not name its ECC.
package nv_pkg;

  localparam int unsigned D          = 16;          // weights per segment
  localparam int unsigned WB         = 8;           // INT8 weight/activation
  localparam int unsigned SEG_W      = D * WB;      // 128
  localparam int unsigned SUB_N      = 4;           // plane rows per segment
  localparam int unsigned SUB_W      = SEG_W / SUB_N; // 32
  localparam int unsigned SUB_PW     = 7;           // SEC-DED check bits per row
  localparam int unsigned PAR_W      = SUB_N * SUB_PW; // 28
  localparam int unsigned ACC_W      = 32;          // accumulator width

  typedef logic [SEG_W-1:0] seg_t;
  typedef logic [PAR_W-1:0] par_t;
  typedef logic [SUB_W-1:0] sub_t;
  typedef logic [SUB_PW-1:0] subp_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  // A weight segment as it leaves a plane cluster.
  typedef struct packed {
    seg_t data;
    par_t par;
  } wseg_t;

  // Hamming code position (1..38) of data bit i: the i-th position that is
  // not a power of two (data bits skip the parity positions 1, 2, 4, ...).
  function automatic int unsigned ham_pos(input int unsigned i);
    int unsigned p;
    p = i + 1;
    for (int unsigned k = 0; k < 6; k++)
      if ((1 << k) <= p) p++;
    return p;
  endfunction

  // Check word of a 32-bit row: bits [5:0] are the Hamming parities, bit 6
  // the overall parity over data and Hamming parities.
  function automatic logic [5:0] ham_h(input sub_t d);
    logic [5:0] h;
    h = '0;
    for (int unsigned i = 0; i < SUB_W; i++)
      if (d[i]) h ^= 6'(ham_pos(i));
    return h;
  endfunction

  function automatic subp_t ham_encode(input sub_t d);
    logic [5:0] h;
    h = ham_h(d);
    return {^{d, h}, h};
  endfunction

  // Syndrome of a received row: [5:0] Hamming syndrome (error position),
  // [6] overall parity error.
  function automatic logic [6:0] ham_syndrome(input sub_t d, input subp_t p);
    return {^{d, p}, ham_h(d) ^ p[5:0]};
  endfunction

  // Parity segment of a full weight segment.
  function automatic par_t seg_encode(input seg_t s);
    par_t p;
    for (int unsigned k = 0; k < SUB_N; k++)
      p[k*SUB_PW +: SUB_PW] = ham_encode(s[k*SUB_W +: SUB_W]);
    return p;
  endfunction

  // Signed dot product of two segments (reference model helper).
  function automatic acc_t seg_dot(input seg_t w, input seg_t a);
    acc_t s;
    s = '0;
    for (int unsigned i = 0; i < D; i++)
      s += ACC_W'($signed(w[i*WB +: WB]) * $signed(a[i*WB +: WB]));
    return s;
  endfunction

endpackage
