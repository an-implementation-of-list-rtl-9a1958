// lscd_top: list successive cancellation polar decoder with a large list.
//
// Decodes one polar codeword of N bits with a list of L paths and CRC-aided
// path selection. The datapath is split as in the architecture it follows:
//   * lscd_pfsg     high stages n-1 .. eps+1: LLR RAMs in LB banks, parallel
//                   F for all paths, serial G one path at a time;
//   * lscd_low_scd  low stages eps .. m, all paths in parallel;
//   * lscd_lclm     low-complexity list management of each M-bit sub-tree:
//                   path-metric update (lscd_pmu) and a radix-2L sorter;
//   * lscd_ptr_mem  pointer memory (which slot holds each path's history);
//   * lscd_ps_mem   partial sums, lscd_path_mem decoded vectors, both built
//                   while G nodes are computed, with no copying;
//   * lscd_crc      per-path CRC and final path choice;
//   * lscd_ctrl     schedule of the tree, list management and frame flow.
//
// Interface. cfg_we/cfg_addr/cfg_type write the bit type of index cfg_addr
// of u (0 frozen, 1 reliable information bit, 2 unreliable information bit)
// while the decoder waits for a frame. A frame is N/P words of P channel
// LLRs (Q = 8 bits, two's complement, range -127..127, positive favours 0),
// taken with in_valid && in_ready. After decoding, the N decoded bits of u
// leave as N/P words of P bits (out_valid, out_chunk gives the word index,
// bit i of word w is u[w*P + i]); frame_done pulses with the last word and
// crc_pass tells whether the chosen path passed the CRC.
//
// The block set and their connections follow the published architecture
// (LLR RAM with PFSG datapath, low-stage unit, LCLM, PS, pointer and path
// memories, CRC unit, control); the port list and handshake are this
// design's own.
module lscd_top
  import lscd_pkg::*;
#(
  parameter int unsigned N    = 4096,
  parameter int unsigned L    = 32,
  parameter int unsigned LB   = 4,
  parameter int unsigned P    = 128,
  parameter int unsigned QPM  = 9,
  parameter int unsigned MLOG = 2,
  parameter int unsigned EPS  = 3,
  parameter int unsigned R    = 24,
  parameter logic [R-1:0] CRC_POLY = R'(24'h864cfb),
  localparam int unsigned Q   = 8,
  localparam int unsigned NL  = $clog2(N),
  localparam int unsigned CW  = (N / P > 1) ? $clog2(N / P) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cfg_we,
  input  logic [NL-1:0]        cfg_addr,
  input  logic [1:0]           cfg_type,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [P-1:0][Q-1:0]  in_llr,
  output logic                 out_valid,
  output logic [CW-1:0]        out_chunk,
  output logic [P-1:0]         out_bits,
  output logic                 frame_done,
  output logic                 crc_pass
);

  localparam int unsigned M   = 1 << MLOG;
  localparam int unsigned SW  = $clog2(NL + 1);
  localparam int unsigned LW  = (L > 1) ? $clog2(L) : 1;
  localparam int unsigned SPB = L / LB;
  localparam int unsigned QW  = (SPB > 1) ? $clog2(SPB) : 1;
  localparam int unsigned LOW = 1 << (EPS + 1);
  localparam int unsigned PSW = 1 << EPS;

  // controller outputs
  node_op_e          pf_op, lo_op;
  logic [SW-1:0]     pf_stage, lo_stage, ptr_stage;
  logic [QW-1:0]     pf_fslot;
  logic [LW-1:0]     pf_gpath, pf_gsrc;
  logic [CW-1:0]     pf_chunk, rd_chunk;
  logic              sr_en, pr_en, ptr_set, lm_init, lm_start, rd_en, busy;
  bit_type_e [M-1:0] lm_btype;
  logic [LW-1:0]     rd_path;

  // datapath signals
  logic [L-1:0][NL-1:0][LW-1:0] ptr;
  logic [L-1:0][LW-1:0]         lo_ptr;
  logic [P-1:0]                 sr_ps;
  logic [L-1:0][PSW-1:0]        pr_ps;
  logic                         lo_valid, lo_is_g;
  logic [QW-1:0]                lo_fslot;
  logic [LW-1:0]                lo_gpath;
  logic [LB-1:0][LOW-1:0][Q-1:0] lo_f_data;
  logic [LOW-1:0][Q-1:0]        lo_g_data;
  logic                         llr_m_valid;
  logic [L-1:0][M-1:0][Q-1:0]   llr_m;
  logic                         lm_busy, lm_done, lm_sorted;
  logic [L-1:0][LW-1:0]         lm_tag;
  logic [L-1:0][M-1:0]          lm_u;
  logic [L-1:0]                 lm_ok, lm_valid, crc_pass_vec;
  logic [L-1:0][QPM-1:0]        lm_pm;
  logic [$clog2((1 << M) + 1)-1:0] lm_rounds;
  logic [LW-1:0]                sel_path;
  logic                         sel_pass;

  lscd_ctrl #(.N(N), .L(L), .LB(LB), .P(P), .MLOG(MLOG), .EPS(EPS)) u_ctrl (
    .clk, .rst_n,
    .cfg_we, .cfg_addr, .cfg_type(bit_type_e'(cfg_type)),
    .in_valid, .in_ready,
    .pf_op, .pf_stage, .pf_fslot, .pf_gpath, .pf_chunk,
    .sr_en, .lo_op, .lo_stage, .pr_en, .ptr_set, .ptr_stage,
    .lm_init, .lm_start, .lm_btype, .lm_done,
    .sel_path, .sel_pass,
    .rd_en, .rd_path, .rd_chunk,
    .out_valid, .out_chunk, .frame_done, .crc_pass, .busy
  );

  // slot holding the parent LLRs of a G node (channel LLRs are shared)
  always_comb begin
    pf_gsrc = '0;
    if (int'(pf_stage) + 1 < NL) pf_gsrc = ptr[pf_gpath][int'(pf_stage) + 1];
    for (int l = 0; l < L; l++)
      lo_ptr[l] = (int'(lo_stage) + 1 < NL) ? ptr[l][int'(lo_stage) + 1] : LW'(l);
  end

  lscd_pfsg #(.N(N), .L(L), .LB(LB), .P(P), .EPS(EPS)) u_pfsg (
    .clk, .rst_n,
    .op(pf_op), .stage(pf_stage), .fslot(pf_fslot), .gpath(pf_gpath),
    .gsrc(pf_gsrc), .chunk(pf_chunk), .load_data(in_llr),
    .g_ps(sr_ps),
    .lo_valid, .lo_is_g, .lo_fslot, .lo_gpath, .lo_f_data, .lo_g_data
  );

  lscd_low_scd #(.L(L), .LB(LB), .EPS(EPS), .MLOG(MLOG), .NL(NL)) u_low (
    .clk,
    .lo_valid, .lo_is_g, .lo_fslot, .lo_gpath, .lo_f_data, .lo_g_data,
    .op(lo_op), .stage(lo_stage), .ptr_in(lo_ptr), .ps_in(pr_ps),
    .llr_m_valid, .llr_m
  );

  lscd_lclm #(.L(L), .MLOG(MLOG), .QPM(QPM)) u_lclm (
    .clk, .rst_n,
    .init(lm_init), .start(lm_start), .llr_m, .btype(lm_btype),
    .busy(lm_busy), .done(lm_done), .tag(lm_tag), .u(lm_u), .ok(lm_ok),
    .pm(lm_pm), .valid(lm_valid), .sorted(lm_sorted), .rounds(lm_rounds)
  );

  lscd_ptr_mem #(.L(L), .NL(NL)) u_ptr (
    .clk, .set_stage(ptr_set), .stage(ptr_stage),
    .commit(lm_done), .tag(lm_tag), .ptr
  );

  lscd_ps_mem #(.N(N), .L(L), .P(P), .MLOG(MLOG), .EPS(EPS)) u_ps (
    .clk, .ptr, .commit(lm_done), .commit_u(lm_u),
    .sr_en, .sr_path(pf_gpath), .sr_stage(pf_stage), .sr_chunk(pf_chunk), .sr_ps,
    .pr_en, .pr_stage(lo_stage), .pr_ps
  );

  lscd_path_mem #(.N(N), .L(L), .P(P), .MLOG(MLOG), .EPS(EPS)) u_path (
    .clk, .ptr, .commit(lm_done), .commit_u(lm_u),
    .sr_en, .sr_path(pf_gpath), .sr_stage(pf_stage), .sr_chunk(pf_chunk),
    .pr_en, .pr_stage(lo_stage),
    .rd_en, .rd_path, .rd_chunk, .rd_data(out_bits)
  );

  lscd_crc #(.L(L), .MLOG(MLOG), .QPM(QPM), .R(R), .POLY(CRC_POLY)) u_crc (
    .clk, .init(lm_init), .commit(lm_done), .tag(lm_tag), .u(lm_u),
    .btype(lm_btype), .valid(lm_valid), .pm(lm_pm),
    .sel_path, .sel_pass, .pass(crc_pass_vec)
  );

endmodule
