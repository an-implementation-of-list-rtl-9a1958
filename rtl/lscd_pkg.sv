// lscd_pkg: shared constants, types and arithmetic of the list successive
// cancellation (LSC) polar decoder.
//
// The default sizes are the main configuration of the decoder: code length
// N = 4096, list size L = 32, L_beta = 4 LLR RAM banks, P = 128 processing
// elements per group, Q = 8 bit LLRs, Q_PM = 9 bit path metrics, multi-bit
// decoding of M = 2^m = 4 bits per list-management step, PFSG/parallel stage
// split at epsilon = 3, and a 24 bit CRC with generator 0x864cfb.
// The saturation rules, the bit-type encoding and the RAM row layout below
// are choices of this implementation.
//
// The F/G arithmetic follows the published decoder (min-sum, 8-bit LLRs);
// the row map and the helper functions are this design's own.
package lscd_pkg;

  // Per-bit code configuration, stored for every index of u.
  typedef enum logic [1:0] {
    BT_FROZEN     = 2'd0,  // fixed to 0
    BT_RELIABLE   = 2'd1,  // information bit in A_r: not expanded
    BT_UNRELIABLE = 2'd2   // information bit in A_u: both values expanded
  } bit_type_e;

  // Node operations issued by the controller to the SC datapath.
  typedef enum logic [1:0] {
    OP_NONE = 2'd0,
    OP_LOAD = 2'd1,
    OP_F    = 2'd2,
    OP_G    = 2'd3
  } node_op_e;

  // F function (min-sum): sign(a) xor sign(b), min(|a|,|b|).
  // Inputs are assumed to lie in [-(2^(Q-1)-1), 2^(Q-1)-1].
  function automatic logic signed [7:0] f_func8(input logic signed [7:0] a,
                                                input logic signed [7:0] b);
    logic [7:0] ma, mb, mn;
    ma = a[7] ? 8'(-a) : 8'(a);
    mb = b[7] ? 8'(-b) : 8'(b);
    mn = (ma < mb) ? ma : mb;
    return (a[7] ^ b[7]) ? -$signed(mn) : $signed(mn);
  endfunction

  // G function: (-1)^s * a + b, saturated to the symmetric Q-bit range.
  function automatic logic signed [7:0] g_func8(input logic s,
                                                input logic signed [7:0] a,
                                                input logic signed [7:0] b);
    logic signed [8:0] sum;
    sum = s ? (9'(b) - 9'(a)) : (9'(b) + 9'(a));
    if (sum > 9'sd127) return 8'sd127;
    else if (sum < -9'sd127) return -8'sd127;
    else return sum[7:0];
  endfunction

  // Number of RAM rows taken by the LLRs of one node at stage t: each row
  // holds 2P LLRs, the first half of the node in lanes [0,P) and the second
  // half in lanes [P,2P).
  function automatic int rows_of_stage(input int t, input int p);
    return ((1 << t) >= 2 * p) ? ((1 << t) / (2 * p)) : 1;
  endfunction

  // Rows of one path slot: the stages eps+2 .. n-1 that live in the RAM.
  function automatic int rows_per_slot(input int n, input int p, input int eps);
    int r;
    r = 0;
    for (int t = eps + 2; t <= n - 1; t++) r += rows_of_stage(t, p);
    return r;
  endfunction

  // Row offset of stage t inside a slot.
  function automatic int stage_row_offset(input int t, input int p, input int eps);
    int r;
    r = 0;
    for (int k = 0; k < 32; k++)
      if (k >= eps + 2 && k < t) r += rows_of_stage(k, p);
    return r;
  endfunction

  // Polar transform of an M-bit vector: v_j = xor of u_i over all i whose
  // binary index contains j (generator F^{(x)m}, F = [1 0; 1 1]).
  function automatic logic [15:0] polar_xform(input logic [15:0] u, input int mbits);
    logic [15:0] v;
    v = '0;
    for (int j = 0; j < mbits; j++)
      for (int i = 0; i < mbits; i++)
        if ((i & j) == j) v[j] ^= u[i];
    return v;
  endfunction

endpackage
