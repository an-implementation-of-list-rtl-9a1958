// lscd_pfsg: parallel-F serial-G (PFSG) computation of the high stages.
//
// Holds the channel LLRs and the LLRs of stages eps+2 .. n-1 of all L paths
// in LB banks of lscd_llr_ram; bank b stores the paths ("slots")
// b*L/LB .. (b+1)*L/LB-1. Each bank has its own group of P F-processing
// elements, so an F node is evaluated for LB paths per cycle, L/LB passes for
// the whole list, with no data permutation: an F node of path l always reads
// the node that path l itself has just written. A single group of P G
// elements, fed through an LB-to-1 multiplexer, evaluates the G nodes one
// path after the other; the controller supplies, for path l, the slot that
// holds the parent LLRs of l (from the pointer memory) and the partial sums
// (from the partial-sum memory), so the crossbar of a fully parallel list
// decoder is replaced by addressing.
//
// Results of stages eps+2 .. n-1 are written back into the RAM; results of
// stage eps+1 are handed to the low-stage unit through the lo_* outputs.
//
// Timing: a command (op, stage, ...) is accepted every cycle. The RAM is read
// in the command cycle; in the next cycle the P (or LB*P) results are
// computed and written, and lo_valid is raised for stage eps+1 results.
// A command that reads data written by the previous command must be issued
// one cycle later (the controller inserts that bubble). OP_LOAD writes P
// channel LLRs into the channel region of every bank.
//
// The banked structure, the one-G-group/LB-F-groups split and the 2PQ/PQ
// port widths follow the paper; the row layout and the command interface are
// this implementation's own.
module lscd_pfsg
  import lscd_pkg::*;
#(
  parameter int unsigned N   = 4096,
  parameter int unsigned L   = 32,
  parameter int unsigned LB  = 4,
  parameter int unsigned P   = 128,
  parameter int unsigned EPS = 3,
  localparam int unsigned Q   = 8,
  localparam int unsigned NL  = $clog2(N),
  localparam int unsigned SW  = $clog2(NL + 1),
  localparam int unsigned LW  = (L > 1) ? $clog2(L) : 1,
  localparam int unsigned SPB = L / LB,
  localparam int unsigned QW  = (SPB > 1) ? $clog2(SPB) : 1,
  localparam int unsigned CW  = (N / P > 1) ? $clog2(N / P) : 1,
  localparam int unsigned LOW = 1 << (EPS + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // command (cycle 0)
  input  node_op_e                op,
  input  logic [SW-1:0]           stage,    // stage of the node computed
  input  logic [QW-1:0]           fslot,    // F: slot index inside each bank
  input  logic [LW-1:0]           gpath,    // G: destination path
  input  logic [LW-1:0]           gsrc,     // G: slot holding the parent LLRs
  input  logic [CW-1:0]           chunk,    // chunk of P results (LOAD: word)
  input  logic [P-1:0][Q-1:0]     load_data,
  // partial sums of the G command, one cycle after it
  input  logic [P-1:0]            g_ps,
  // stage eps+1 results towards the low-stage unit (cycle 1)
  output logic                    lo_valid,
  output logic                    lo_is_g,
  output logic [QW-1:0]           lo_fslot,
  output logic [LW-1:0]           lo_gpath,
  output logic [LB-1:0][LOW-1:0][Q-1:0] lo_f_data,
  output logic [LOW-1:0][Q-1:0]   lo_g_data
);

  localparam int unsigned RN   = N / (2 * P);             // channel rows
  localparam int unsigned RPS  = rows_per_slot(NL, P, EPS);
  localparam int unsigned ROWS = RN + SPB * RPS;
  localparam int unsigned AW   = (ROWS > 1) ? $clog2(ROWS) : 1;

  // Row address of chunk c of the input node (stage t, t = stage + 1).
  function automatic logic [AW-1:0] rd_row(input int q, input int t, input int c);
    if (t == NL) return AW'(c);
    return AW'(RN + q * RPS + stage_row_offset(t, P, EPS) + c);
  endfunction

  // Row address and lane mask for writing chunk c of a node at stage t.
  function automatic logic [AW-1:0] wr_row(input int q, input int t, input int c);
    int r;
    r = (c % rows_of_stage(t, P));
    if (t == NL) return AW'(r);
    return AW'(RN + q * RPS + stage_row_offset(t, P, EPS) + r);
  endfunction

  // Place up to P results of chunk c of a node of 2^t LLRs into a 2P row.
  function automatic void place(input int t, input int c,
                                input logic [P-1:0][Q-1:0] res,
                                output logic [2*P-1:0] wen,
                                output logic [2*P-1:0][Q-1:0] wd);
    int h;
    wen = '0;
    wd  = '0;
    if ((1 << t) >= 2 * P) begin
      h = c / rows_of_stage(t, P);
      for (int i = 0; i < P; i++) begin
        wen[h * P + i] = 1'b1;
        wd[h * P + i]  = res[i];
      end
    end else begin
      h = (1 << t) / 2;
      for (int i = 0; i < P; i++)
        if (i < h) begin
          wen[i]     = 1'b1;
          wd[i]      = res[i];
          wen[P + i] = 1'b1;
          wd[P + i]  = res[h + i];
        end
    end
  endfunction

  // ---------------- cycle 0: read ----------------
  logic [LB-1:0]                  re;
  logic [LB-1:0][AW-1:0]          raddr;
  logic [LB-1:0][2*P-1:0][Q-1:0]  rdata;
  logic [LB-1:0][AW-1:0]          waddr;
  logic [LB-1:0][2*P-1:0]         wen;
  logic [LB-1:0][2*P-1:0][Q-1:0]  wdata;

  always_comb begin
    re    = '0;
    raddr = '0;
    for (int b = 0; b < LB; b++) begin
      if (op == OP_F) begin
        re[b]    = 1'b1;
        raddr[b] = rd_row(int'(fslot), int'(stage) + 1, int'(chunk));
      end else if (op == OP_G) begin
        if (int'(stage) + 1 == NL) begin
          re[b]    = (b == 0);
          raddr[b] = rd_row(0, NL, int'(chunk));
        end else if (int'(gsrc) / SPB == b) begin
          re[b]    = 1'b1;
          raddr[b] = rd_row(int'(gsrc) % SPB, int'(stage) + 1, int'(chunk));
        end
      end
    end
  end

  // ---------------- pipeline register ----------------
  node_op_e            op_q;
  logic [SW-1:0]       stage_q;
  logic [QW-1:0]       fslot_q;
  logic [LW-1:0]       gpath_q, gsrc_q;
  logic [CW-1:0]       chunk_q;
  logic [P-1:0][Q-1:0] load_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      op_q <= OP_NONE;
    end else begin
      op_q <= op;
    end
  end

  always_ff @(posedge clk) begin
    stage_q <= stage;
    fslot_q <= fslot;
    gpath_q <= gpath;
    gsrc_q  <= gsrc;
    chunk_q <= chunk;
    load_q  <= load_data;
  end

  // ---------------- cycle 1: compute and write ----------------
  logic [LB-1:0][P-1:0][Q-1:0] f_res;
  logic [P-1:0][Q-1:0]         g_res;
  logic [2*P-1:0][Q-1:0]       g_in;
  logic                        to_low;

  always_comb begin
    // parallel F groups, one per bank
    for (int b = 0; b < LB; b++)
      for (int i = 0; i < P; i++)
        f_res[b][i] = f_func8(rdata[b][i], rdata[b][P + i]);
    // serial G group behind an LB-to-1 multiplexer
    g_in = rdata[0];
    if (int'(stage_q) + 1 != NL) g_in = rdata[int'(gsrc_q) / SPB];
    for (int i = 0; i < P; i++)
      g_res[i] = g_func8(g_ps[i], g_in[i], g_in[P + i]);
  end

  assign to_low = (int'(stage_q) == EPS + 1);

  for (genvar b = 0; b < LB; b++) begin : g_wr
    always_comb begin
      logic [2*P-1:0]        wm;
      logic [2*P-1:0][Q-1:0] wd;
      wen[b]   = '0;
      wdata[b] = '0;
      waddr[b] = '0;
      wm       = '0;
      wd       = '0;
      if (op_q == OP_LOAD) begin
        place(NL, int'(chunk_q), load_q, wm, wd);
        wen[b]   = wm;
        wdata[b] = wd;
        waddr[b] = wr_row(0, NL, int'(chunk_q));
      end else if (op_q == OP_F && !to_low) begin
        place(int'(stage_q), int'(chunk_q), f_res[b], wm, wd);
        wen[b]   = wm;
        wdata[b] = wd;
        waddr[b] = wr_row(int'(fslot_q), int'(stage_q), int'(chunk_q));
      end else if (op_q == OP_G && !to_low && int'(gpath_q) / SPB == b) begin
        place(int'(stage_q), int'(chunk_q), g_res, wm, wd);
        wen[b]   = wm;
        wdata[b] = wd;
        waddr[b] = wr_row(int'(gpath_q) % SPB, int'(stage_q), int'(chunk_q));
      end
    end
  end

  for (genvar b = 0; b < LB; b++) begin : g_bank
    lscd_llr_ram #(.P(P), .Q(Q), .ROWS(ROWS)) u_ram (
      .clk  (clk),
      .re   (re[b]),
      .raddr(raddr[b]),
      .rdata(rdata[b]),
      .waddr(waddr[b]),
      .wen  (wen[b]),
      .wdata(wdata[b])
    );
  end

  // stage eps+1 results go to the low-stage unit
  assign lo_valid = to_low && (op_q == OP_F || op_q == OP_G);
  assign lo_is_g  = (op_q == OP_G);
  assign lo_fslot = fslot_q;
  assign lo_gpath = gpath_q;
  always_comb begin
    for (int b = 0; b < LB; b++)
      for (int i = 0; i < LOW; i++) lo_f_data[b][i] = f_res[b][i];
    for (int i = 0; i < LOW; i++) lo_g_data[i] = g_res[i];
  end

endmodule
