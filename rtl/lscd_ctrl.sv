// lscd_ctrl: control logic of the list decoder.
//
// Walks the scheduling tree of one frame. Stages n-1 .. m are computed node
// by node; each stage-m node (an M-bit sub-tree) is followed by a list-
// management step. For sub-tree j (j = 0 .. N/M-1) the controller issues
//   j = 0 : F nodes at stages n-1, n-2, ..., m
//   j > 0 : one G node at stage s = m + (number of trailing zeros of j),
//           then F nodes at stages s-1, ..., m
// and then starts the LCLM unit with the bit types of bits jM .. jM+M-1.
//
// A node at a high stage (s > eps) goes to the PFSG unit: an F node takes
// L/LB passes of ceil(2^s/P) commands (LB paths per pass), a G node takes L
// passes of ceil(2^s/P) commands, one path at a time, with the partial-sum
// and path memories stored alongside. After the last command of a high node
// one bubble cycle lets the RAM write land before the next node reads it.
// A node at a low stage (m <= s <= eps) takes one cycle for all paths. The
// first command of every node marks stage s as written by every path in the
// pointer memory.
//
// Frame flow: LOAD accepts N/P words of P channel LLRs (in_valid/in_ready),
// then decoding runs without further input; after the last sub-tree the
// path chosen by the CRC unit is read out, P bits per cycle (out_valid,
// out_chunk), and frame_done pulses with crc_pass. The bit-type table
// (frozen / reliable / unreliable per index of u) is written through the
// cfg_* port while the decoder is idle.
//
// The node order follows the SC schedule of the paper; the command
// encoding, the bubble and the frame handshake are this implementation's.
module lscd_ctrl
  import lscd_pkg::*;
#(
  parameter int unsigned N    = 4096,
  parameter int unsigned L    = 32,
  parameter int unsigned LB   = 4,
  parameter int unsigned P    = 128,
  parameter int unsigned MLOG = 2,
  parameter int unsigned EPS  = 3,
  localparam int unsigned NL  = $clog2(N),
  localparam int unsigned M   = 1 << MLOG,
  localparam int unsigned SW  = $clog2(NL + 1),
  localparam int unsigned LW  = (L > 1) ? $clog2(L) : 1,
  localparam int unsigned SPB = L / LB,
  localparam int unsigned QW  = (SPB > 1) ? $clog2(SPB) : 1,
  localparam int unsigned CW  = (N / P > 1) ? $clog2(N / P) : 1,
  localparam int unsigned JW  = $clog2(N / M) + 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // code configuration
  input  logic             cfg_we,
  input  logic [NL-1:0]    cfg_addr,
  input  bit_type_e        cfg_type,
  // channel LLR input handshake
  input  logic             in_valid,
  output logic             in_ready,
  // PFSG commands
  output node_op_e         pf_op,
  output logic [SW-1:0]    pf_stage,
  output logic [QW-1:0]    pf_fslot,
  output logic [LW-1:0]    pf_gpath,
  output logic [CW-1:0]    pf_chunk,
  // partial-sum / path memory serial store (high G)
  output logic             sr_en,
  // low-stage commands
  output node_op_e         lo_op,
  output logic [SW-1:0]    lo_stage,
  output logic             pr_en,
  // pointer memory
  output logic             ptr_set,
  output logic [SW-1:0]    ptr_stage,
  // list management
  output logic             lm_init,
  output logic             lm_start,
  output bit_type_e [M-1:0] lm_btype,
  input  logic             lm_done,
  // read-out
  input  logic [LW-1:0]    sel_path,
  input  logic             sel_pass,
  output logic             rd_en,
  output logic [LW-1:0]    rd_path,
  output logic [CW-1:0]    rd_chunk,
  output logic             out_valid,
  output logic [CW-1:0]    out_chunk,
  output logic             frame_done,
  output logic             crc_pass,
  output logic             busy
);

  localparam int unsigned NW = N / P;   // channel words per frame

  typedef enum logic [2:0] {
    C_LOAD, C_NODE_HI, C_BUBBLE, C_NODE_LO, C_LM_START, C_LM_WAIT, C_SELECT, C_OUT
  } cstate_e;

  cstate_e         state;
  bit_type_e       btab [N];
  logic [JW-1:0]   j;        // current sub-tree
  logic [SW-1:0]   s;        // stage of the current node
  logic            is_g;     // current node is a G node
  logic [LW-1:0]   pl;       // pass index: path (G) or slot in bank (F)
  logic [CW-1:0]   c;        // chunk index
  logic [CW-1:0]   w;        // load / read-out word
  logic            first;    // first command of a node
  logic [LW-1:0]   sel_q;
  logic            rd_q;
  logic [CW-1:0]   rd_c_q;

  function automatic int chunks(input int st);
    return ((1 << st) > P) ? ((1 << st) / P) : 1;
  endfunction

  function automatic logic [SW-1:0] g_stage(input logic [JW-1:0] jj);
    int t;
    t = 0;
    for (int b = JW - 1; b >= 0; b--) if (jj[b]) t = b;
    return SW'(MLOG + t);
  endfunction

  always_ff @(posedge clk)
    if (cfg_we && state == C_LOAD) btab[cfg_addr] <= cfg_type;

  always_comb
    for (int i = 0; i < M; i++) lm_btype[i] = btab[int'(j) * M + i];

  // command outputs
  logic last_cmd;
  always_comb begin
    pf_op    = OP_NONE;
    pf_stage = s;
    pf_fslot = QW'(pl);
    pf_gpath = pl;
    pf_chunk = c;
    sr_en    = 1'b0;
    lo_op    = OP_NONE;
    lo_stage = s;
    pr_en    = 1'b0;
    ptr_set  = 1'b0;
    ptr_stage = s;
    in_ready = (state == C_LOAD);
    last_cmd = 1'b0;
    case (state)
      C_LOAD: if (in_valid) begin
        pf_op    = OP_LOAD;
        pf_chunk = w;
      end
      C_NODE_HI: begin
        pf_op   = is_g ? OP_G : OP_F;
        sr_en   = is_g;
        ptr_set = first;
        last_cmd = (int'(c) == chunks(int'(s)) - 1) &&
                   (is_g ? (int'(pl) == L - 1) : (int'(pl) == SPB - 1));
      end
      C_NODE_LO: begin
        lo_op   = is_g ? OP_G : OP_F;
        pr_en   = is_g;
        ptr_set = 1'b1;
      end
      default: ;
    endcase
  end

  assign lm_start = (state == C_LM_START);
  assign rd_en    = (state == C_OUT);
  assign rd_path  = sel_q;
  assign rd_chunk = w;
  assign busy     = (state != C_LOAD);

  // the node that follows a node at stage s (F at s-1, or list management)
  cstate_e nxt_state;
  always_comb begin
    if (int'(s) == MLOG)          nxt_state = C_LM_START;
    else if (int'(s) - 1 > EPS)   nxt_state = C_NODE_HI;
    else                          nxt_state = C_NODE_LO;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= C_LOAD;
      w          <= '0;
      j          <= '0;
      lm_init    <= 1'b0;
      rd_q       <= 1'b0;
      frame_done <= 1'b0;
      crc_pass   <= 1'b0;
    end else begin
      lm_init    <= 1'b0;
      frame_done <= 1'b0;
      rd_q       <= rd_en;
      rd_c_q     <= w;
      case (state)
        C_LOAD: if (in_valid) begin
          w <= w + 1'b1;
          if (int'(w) == NW - 1) begin
            w       <= '0;
            j       <= '0;
            lm_init <= 1'b1;
            // sub-tree 0 starts with F at stage n-1; wait one cycle for the
            // last channel word to be written
            s     <= SW'(NL);
            state <= C_BUBBLE;
          end
        end
        C_NODE_HI: begin
          first <= 1'b0;
          if (last_cmd) begin
            state <= C_BUBBLE;
          end else if (int'(c) == chunks(int'(s)) - 1) begin
            c  <= '0;
            pl <= pl + 1'b1;
          end else begin
            c <= c + 1'b1;
          end
        end
        C_BUBBLE, C_NODE_LO: begin
          state <= nxt_state;
          if (int'(s) != MLOG) begin
            s     <= s - 1'b1;
            is_g  <= 1'b0;
            pl    <= '0;
            c     <= '0;
            first <= 1'b1;
          end
        end
        C_LM_START: state <= C_LM_WAIT;
        C_LM_WAIT: if (lm_done) begin
          if (int'(j) == N / M - 1) begin
            state <= C_SELECT;
          end else begin
            j     <= j + 1'b1;
            s     <= g_stage(j + 1'b1);
            is_g  <= 1'b1;
            pl    <= '0;
            c     <= '0;
            first <= 1'b1;
            state <= (int'(g_stage(j + 1'b1)) > EPS) ? C_NODE_HI : C_NODE_LO;
          end
        end
        C_SELECT: begin
          sel_q    <= sel_path;
          crc_pass <= sel_pass;
          w        <= '0;
          state    <= C_OUT;
        end
        C_OUT: begin
          w <= w + 1'b1;
          if (int'(w) == NW - 1) begin
            w          <= '0;
            frame_done <= 1'b1;
            state      <= C_LOAD;
          end
        end
        default: state <= C_LOAD;
      endcase
    end
  end

  assign out_valid = rd_q;
  assign out_chunk = rd_c_q;

endmodule
