// lscd_ps_mem: partial-sum memory with its update logic.
//
// A G node at stage s needs the partial sums beta of its left sibling: the
// 2^s re-encoded bits of the sub-tree decoded just before. This memory keeps,
// for every slot and every stage k (m <= k <= n-1), the partial sums of the
// last left sub-tree of stage k ("beta_k"), plus, per path, the M re-encoded
// bits v = u * F^{(x)m} of the latest list-management step.
//
// The partial sums of the left sibling at stage s of path l are assembled
// when the G node is computed, from the stored sub-tree sums of l's history:
//   beta_s[i] = v_l[i mod M]  xor  XOR_{k=m}^{s-1} (bit k of i == 0) &
//               beta_k[ptr[l][k]][i mod 2^k]
// (the recursion beta_{k+1} = [beta_left_k xor beta_k, beta_k] unrolled),
// and beta_s is stored in the slot of l at stage s. Because the pointer
// memory names the slot of the history, no copy between paths is needed,
// and because high-stage G nodes run one path at a time, one path's sums
// are built per cycle (serial port, P bits per cycle). The low-stage G nodes
// run for all paths at once through the parallel port (2^s <= 2^eps bits).
// The two-level register/RAM split of the published design is a mapping
// detail; here all storage is one register array.
//
// Timing: commit stores the new v bits at the clock edge. Serial port: the
// P partial sums of (path, stage, chunk) appear on sr_ps one cycle after
// sr_en; the store happens at the same edge. Parallel port: pr_ps is
// combinational; the store happens at the clock edge.
module lscd_ps_mem
  import lscd_pkg::*;
#(
  parameter int unsigned N    = 4096,
  parameter int unsigned L    = 32,
  parameter int unsigned P    = 128,
  parameter int unsigned MLOG = 2,
  parameter int unsigned EPS  = 3,
  localparam int unsigned NL  = $clog2(N),
  localparam int unsigned M   = 1 << MLOG,
  localparam int unsigned LW  = (L > 1) ? $clog2(L) : 1,
  localparam int unsigned SW  = $clog2(NL + 1),
  localparam int unsigned CW  = (N / P > 1) ? $clog2(N / P) : 1,
  localparam int unsigned PSW = 1 << EPS
) (
  input  logic                          clk,
  input  logic [L-1:0][NL-1:0][LW-1:0]  ptr,
  // list-management commit: decoded bits of every new path
  input  logic                          commit,
  input  logic [L-1:0][M-1:0]           commit_u,
  // serial port (high-stage G)
  input  logic                          sr_en,
  input  logic [LW-1:0]                 sr_path,
  input  logic [SW-1:0]                 sr_stage,
  input  logic [CW-1:0]                 sr_chunk,
  output logic [P-1:0]                  sr_ps,
  // parallel port (low-stage G)
  input  logic                          pr_en,
  input  logic [SW-1:0]                 pr_stage,
  output logic [L-1:0][PSW-1:0]         pr_ps
);

  logic [N-1:0] mem [L];
  logic [L-1:0][M-1:0] vnew;

  // beta_s[idx] of path l (see the formula above), one XOR tree per bit
  logic [P-1:0] sr_w;
  for (genvar i = 0; i < P; i++) begin : g_sr
    always_comb begin
      int idx;
      idx = int'(sr_chunk) * P + i;
      sr_w[i] = vnew[sr_path][idx % M];
      for (int k = MLOG; k < NL; k++)
        if (k < int'(sr_stage) && !idx[k])
          sr_w[i] ^= mem[ptr[sr_path][k]][(1 << k) + (idx % (1 << k))];
      if (idx >= (1 << sr_stage)) sr_w[i] = 1'b0;
    end
  end
  for (genvar l = 0; l < L; l++) begin : g_prl
    for (genvar i = 0; i < PSW; i++) begin : g_pri
      always_comb begin
        pr_ps[l][i] = vnew[l][i % M];
        for (int k = MLOG; k < NL; k++)
          if (k < int'(pr_stage) && ((i >> k) & 1) == 0)
            pr_ps[l][i] ^= mem[ptr[l][k]][(1 << k) + (i % (1 << k))];
        if (i >= (1 << pr_stage)) pr_ps[l][i] = 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    sr_ps <= sr_w;
    if (commit)
      for (int l = 0; l < L; l++) vnew[l] <= M'(polar_xform(16'(commit_u[l]), M));
    if (sr_en)
      for (int i = 0; i < P; i++)
        if (int'(sr_chunk) * P + i < (1 << sr_stage))
          mem[sr_path][(1 << sr_stage) + int'(sr_chunk) * P + i] <= sr_w[i];
    if (pr_en)
      for (int l = 0; l < L; l++)
        for (int i = 0; i < PSW; i++)
          if (i < (1 << pr_stage)) mem[l][(1 << pr_stage) + i] <= pr_ps[l][i];
  end

endmodule
