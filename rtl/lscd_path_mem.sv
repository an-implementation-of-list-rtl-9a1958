// lscd_path_mem: path memory (decoded vectors of the L paths).
//
// Organised exactly like the partial-sum memory: for every slot and every
// stage k (m <= k <= n-1) it keeps the decoded bits u of the last left
// sub-tree of stage k, and per path the M bits of the latest list-management
// step. The decoded bits of the left sibling at stage s of path l are the
// concatenation, in index order, of the stored stage s-1, s-2, ..., m
// sub-trees of l's history (found through the pointer memory) followed by
// the latest M bits:
//   u_s[i] = u_k[ptr[l][k]][i mod 2^k], with k the highest stage < s whose
//            index bit is 0 (bits k+1 .. s-1 of i all 1),
//            or the latest bits when bits m .. s-1 of i are all 1,
// and they are stored in the slot of l at stage s when the G node of stage s
// is computed (serial port for high stages, parallel port for low stages).
// No vector is ever copied between paths.
//
// After the last sub-tree the full N-bit vector of a chosen path is read
// out P bits per cycle through the read port (the same rule with s = n).
//
// Timing: commit and stores take effect at the clock edge; sr/rd outputs are
// registered (one cycle latency). The memory is not reset.
//
// A copy-free path memory addressed through the pointer memory follows the
// published design; the per-stage storage and the concatenation rule written
// as above are this design's own formulation.
module lscd_path_mem
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
  input  logic                          commit,
  input  logic [L-1:0][M-1:0]           commit_u,
  // serial store (high-stage G)
  input  logic                          sr_en,
  input  logic [LW-1:0]                 sr_path,
  input  logic [SW-1:0]                 sr_stage,
  input  logic [CW-1:0]                 sr_chunk,
  // parallel store (low-stage G)
  input  logic                          pr_en,
  input  logic [SW-1:0]                 pr_stage,
  // read-out of a decoded vector
  input  logic                          rd_en,
  input  logic [LW-1:0]                 rd_path,
  input  logic [CW-1:0]                 rd_chunk,
  output logic [P-1:0]                  rd_data
);

  logic [N-1:0] mem [L];
  logic [L-1:0][M-1:0] unew;

  // u_s[idx] of path l (see the rule above): the highest stage k < s whose
  // index bit is 0 supplies the bit, otherwise the latest M bits do
  logic [P-1:0] sr_w, rd_w;
  logic [L-1:0][PSW-1:0] pr_w;
  for (genvar i = 0; i < P; i++) begin : g_sr
    always_comb begin
      int   idx;
      logic hit;
      idx = int'(sr_chunk) * P + i;
      sr_w[i] = unew[sr_path][idx % M];
      hit = 1'b0;
      for (int k = NL - 1; k >= MLOG; k--)
        if (k < int'(sr_stage) && !hit && !idx[k]) begin
          sr_w[i] = mem[ptr[sr_path][k]][(1 << k) + (idx % (1 << k))];
          hit = 1'b1;
        end
      if (idx >= (1 << sr_stage)) sr_w[i] = 1'b0;
    end
    always_comb begin
      int   idx;
      logic hit;
      idx = int'(rd_chunk) * P + i;
      rd_w[i] = unew[rd_path][idx % M];
      hit = 1'b0;
      for (int k = NL - 1; k >= MLOG; k--)
        if (!hit && !idx[k]) begin
          rd_w[i] = mem[ptr[rd_path][k]][(1 << k) + (idx % (1 << k))];
          hit = 1'b1;
        end
    end
  end
  for (genvar l = 0; l < L; l++) begin : g_prl
    for (genvar i = 0; i < PSW; i++) begin : g_pri
      always_comb begin
        logic hit;
        pr_w[l][i] = unew[l][i % M];
        hit = 1'b0;
        for (int k = NL - 1; k >= MLOG; k--)
          if (k < int'(pr_stage) && !hit && ((i >> k) & 1) == 0) begin
            pr_w[l][i] = mem[ptr[l][k]][(1 << k) + (i % (1 << k))];
            hit = 1'b1;
          end
        if (i >= (1 << pr_stage)) pr_w[l][i] = 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= rd_w;
    if (commit) unew <= commit_u;
    if (sr_en)
      for (int i = 0; i < P; i++)
        if (int'(sr_chunk) * P + i < (1 << sr_stage))
          mem[sr_path][(1 << sr_stage) + int'(sr_chunk) * P + i] <= sr_w[i];
    if (pr_en)
      for (int l = 0; l < L; l++)
        for (int i = 0; i < PSW; i++)
          if (i < (1 << pr_stage)) mem[l][(1 << pr_stage) + i] <= pr_w[l][i];
  end

endmodule
