// lscd_low_scd: SC computation of the low stages eps .. m for all paths.
//
// For the low stages the PFSG schedule would cost more cycles than the
// nodes contain work, so these stages run fully in parallel: every path has
// its own F/G hardware and one node of every path is computed per cycle.
// The LLRs of stages m+1 .. eps+1 of all paths are kept in one register
// array that every path's hardware can address; a G node of path l reads the
// parent node from the slot named by the pointer memory (ptr_in[l]), so no
// crossbar is needed. (The decoder this follows keeps one copy of this small
// memory per path; one array with L read ports behaves the same.)
//
// Stage eps+1 nodes arrive from the PFSG unit (lo_* inputs). The stage-m
// outputs (M LLRs per path) are registered on llr_m and flagged by
// llr_m_valid for one cycle; they are the inputs of list management.
//
// Timing: one command per cycle (op, stage); results are stored at the next
// clock edge, so back-to-back dependent commands are allowed.
//
// Handling the stages at and below epsilon in registers follows the published
// design; the triangular buffer layout and one-cycle-per-node timing are this
// design's own choices.
module lscd_low_scd
  import lscd_pkg::*;
#(
  parameter int unsigned L    = 32,
  parameter int unsigned LB   = 4,
  parameter int unsigned EPS  = 3,
  parameter int unsigned MLOG = 2,
  parameter int unsigned NL   = 12,
  localparam int unsigned Q   = 8,
  localparam int unsigned M   = 1 << MLOG,
  localparam int unsigned SW  = $clog2(NL + 1),
  localparam int unsigned LW  = (L > 1) ? $clog2(L) : 1,
  localparam int unsigned SPB = L / LB,
  localparam int unsigned QW  = (SPB > 1) ? $clog2(SPB) : 1,
  localparam int unsigned LOW = 1 << (EPS + 1),
  localparam int unsigned PSW = 1 << EPS
) (
  input  logic                          clk,
  // stage eps+1 writes from the PFSG unit
  input  logic                          lo_valid,
  input  logic                          lo_is_g,
  input  logic [QW-1:0]                 lo_fslot,
  input  logic [LW-1:0]                 lo_gpath,
  input  logic [LB-1:0][LOW-1:0][Q-1:0] lo_f_data,
  input  logic [LOW-1:0][Q-1:0]         lo_g_data,
  // low-stage command
  input  node_op_e                      op,
  input  logic [SW-1:0]                 stage,
  input  logic [L-1:0][LW-1:0]          ptr_in,  // slot of the parent, per path
  input  logic [L-1:0][PSW-1:0]         ps_in,   // partial sums, per path
  // stage-m outputs
  output logic                          llr_m_valid,
  output logic [L-1:0][M-1:0][Q-1:0]    llr_m
);

  // mem[slot][2^t + i] holds LLR i of the stage-t node of the slot
  logic [2*LOW-1:0][Q-1:0] mem [L];

  logic [L-1:0][PSW-1:0][Q-1:0] res;
  logic                         do_op;

  assign do_op = (op == OP_F || op == OP_G);

  always_comb begin
    for (int l = 0; l < L; l++) begin
      res[l] = '0;
      for (int i = 0; i < PSW; i++) begin
        if (i < (1 << stage)) begin
          if (op == OP_G)
            res[l][i] = g_func8(ps_in[l][i],
                                mem[ptr_in[l]][(2 << stage) + i],
                                mem[ptr_in[l]][(2 << stage) + (1 << stage) + i]);
          else
            res[l][i] = f_func8(mem[l][(2 << stage) + i],
                                mem[l][(2 << stage) + (1 << stage) + i]);
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    llr_m_valid <= do_op && (int'(stage) == MLOG);
    if (do_op && int'(stage) == MLOG)
      for (int l = 0; l < L; l++)
        for (int i = 0; i < M; i++) llr_m[l][i] <= res[l][i];
    for (int l = 0; l < L; l++) begin
      if (do_op && int'(stage) > MLOG)
        for (int i = 0; i < PSW; i++)
          if (i < (1 << stage)) mem[l][(1 << stage) + i] <= res[l][i];
      if (lo_valid && lo_is_g && int'(lo_gpath) == l)
        for (int i = 0; i < LOW; i++) mem[l][LOW + i] <= lo_g_data[i];
      if (lo_valid && !lo_is_g && (l % SPB) == int'(lo_fslot))
        for (int i = 0; i < LOW; i++) mem[l][LOW + i] <= lo_f_data[l / SPB][i];
    end
  end

endmodule
