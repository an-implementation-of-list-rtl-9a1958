// lscd_lclm: low-complexity list management (LCLM) of one M-bit sub-tree.
//
// Receives the stage-m LLRs of all L paths and the bit types of the M bits
// of the sub-tree, and decides which L expanded paths survive. Each surviving
// path l is described by tag[l] (the old path it was expanded from), u[l]
// (its M decoded bits) and ok[l] (whether the entry holds a path at all:
// right after the start only path 0 exists).
//
// Every path gets one lscd_pmu, which yields 2^Mu candidates per path, one
// per value pattern of the Mu unreliable bits. Pruning uses one radix-2L
// sorter (lscd_sorter) serially: the list is first filled with the
// all-zero-pattern candidates of every path; then, for each further pattern,
// the current L entries and the L candidates of that pattern are sorted and
// the best L are kept. With Mu = 0 no sorting happens and every path simply
// takes its best candidate.
//
// The path metrics live here (Q_PM bits each). After every decision the
// smallest surviving metric is subtracted from all of them, so that they
// stay inside Q_PM bits; this normalisation is this implementation's choice.
//
// Timing: start is sampled in one cycle; then one cycle per sorting round
// (2^Mu - 1 rounds); then done is high for one cycle with tag/u/ok valid.
// init (with no start) resets the list to the single path 0 with metric 0.
//
// The candidate-per-pattern expansion of unreliable bits and the serial
// 2L-to-L pruning follow the published list manager; one sorting round per
// cycle, the tie order and metric normalisation at commit are this design's
// own choices.
module lscd_lclm
  import lscd_pkg::*;
#(
  parameter int unsigned L    = 32,
  parameter int unsigned MLOG = 2,
  parameter int unsigned QPM  = 9,
  localparam int unsigned Q   = 8,
  localparam int unsigned M   = 1 << MLOG,
  localparam int unsigned NC  = 1 << M,
  localparam int unsigned LW  = (L > 1) ? $clog2(L) : 1,
  localparam int unsigned IW  = $clog2(2 * L)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        init,
  input  logic                        start,
  input  logic [L-1:0][M-1:0][Q-1:0]  llr_m,
  input  bit_type_e [M-1:0]           btype,
  output logic                        busy,
  output logic                        done,
  output logic [L-1:0][LW-1:0]        tag,
  output logic [L-1:0][M-1:0]         u,
  output logic [L-1:0]                ok,
  output logic [L-1:0][QPM-1:0]       pm,      // metrics of the current list
  output logic [L-1:0]                valid,   // paths of the current list
  output logic                        sorted,  // debug/monitor: a sort round ran
  output logic [$clog2(NC+1)-1:0]     rounds   // sorting rounds of the last step
);

  typedef enum logic [1:0] {S_IDLE, S_SORT, S_COMMIT} state_e;
  state_e state;

  // candidates of all paths, captured at start
  logic [L-1:0][NC-1:0]              c_ok_w,  c_ok;
  logic [L-1:0][NC-1:0][QPM-1:0]     c_pm_w,  c_pm;
  logic [L-1:0][NC-1:0][M-1:0]       c_u_w,   c_u;
  logic [M-1:0]                      unrel_q;
  logic [M:0]                        k_q;     // next pattern, M+1 bits

  // current list
  logic [L-1:0][LW-1:0]  cur_tag;
  logic [L-1:0][M-1:0]   cur_u;
  logic [L-1:0][QPM-1:0] cur_pm;
  logic [L-1:0]          cur_ok;

  for (genvar l = 0; l < L; l++) begin : g_pmu
    lscd_pmu #(.MLOG(MLOG), .QPM(QPM)) u_pmu (
      .llr     (llr_m[l]),
      .btype   (btype),
      .pm_in   (pm[l]),
      .valid_in(valid[l]),
      .cand_ok (c_ok_w[l]),
      .cand_pm (c_pm_w[l]),
      .cand_u  (c_u_w[l])
    );
  end

  // next pattern after k whose set bits are all unreliable (NC if none)
  function automatic logic [M:0] next_pattern(input logic [M:0] k, input logic [M-1:0] um);
    logic [M:0] r;
    r = (M + 1)'(NC);
    for (int j = NC - 1; j >= 0; j--)
      if ((M + 1)'(j) > k && ((M'(j) & ~um) == '0)) r = (M + 1)'(j);
    return r;
  endfunction

  logic [M-1:0] unrel_w;
  always_comb
    for (int i = 0; i < M; i++) unrel_w[i] = (btype[i] == BT_UNRELIABLE);

  // sorter: current list (inputs 0..L-1) against pattern k (inputs L..2L-1)
  logic [2*L-1:0]          s_ok;
  logic [2*L-1:0][QPM-1:0] s_pm;
  logic [L-1:0][IW-1:0]    s_sel;
  logic [L-1:0]            s_sel_ok;

  always_comb begin
    for (int l = 0; l < L; l++) begin
      s_ok[l]     = cur_ok[l];
      s_pm[l]     = cur_pm[l];
      s_ok[L + l] = c_ok[l][k_q[M-1:0]];
      s_pm[L + l] = c_pm[l][k_q[M-1:0]];
    end
  end

  lscd_sorter #(.L(L), .QPM(QPM)) u_sorter (
    .in_ok (s_ok),
    .in_pm (s_pm),
    .sel   (s_sel),
    .sel_ok(s_sel_ok)
  );

  // minimum surviving metric, for normalisation
  logic [QPM-1:0] pm_min;
  always_comb begin
    pm_min = {QPM{1'b1}};
    for (int l = 0; l < L; l++)
      if (cur_ok[l] && cur_pm[l] < pm_min) pm_min = cur_pm[l];
  end

  assign busy = (state != S_IDLE);
  assign done = (state == S_COMMIT);
  assign tag  = cur_tag;
  assign u    = cur_u;
  assign ok   = cur_ok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      valid  <= '0;
      pm     <= '0;
      sorted <= 1'b0;
      rounds <= '0;
    end else begin
      case (state)
        S_IDLE: begin
          if (init) begin
            valid    <= '0;
            valid[0] <= 1'b1;
            pm       <= '0;
          end else if (start) begin
            c_ok    <= c_ok_w;
            c_pm    <= c_pm_w;
            c_u     <= c_u_w;
            unrel_q <= unrel_w;
            for (int l = 0; l < L; l++) begin
              cur_tag[l] <= LW'(l);
              cur_u[l]   <= c_u_w[l][0];
              cur_pm[l]  <= c_pm_w[l][0];
              cur_ok[l]  <= c_ok_w[l][0];
            end
            k_q    <= next_pattern('0, unrel_w);
            sorted <= 1'b0;
            rounds <= '0;
            state  <= (next_pattern('0, unrel_w) == (M + 1)'(NC)) ? S_COMMIT : S_SORT;
          end
        end
        S_SORT: begin
          for (int r = 0; r < L; r++) begin
            if (s_sel[r] < IW'(L)) begin
              cur_tag[r] <= cur_tag[s_sel[r][LW-1:0]];
              cur_u[r]   <= cur_u[s_sel[r][LW-1:0]];
              cur_pm[r]  <= cur_pm[s_sel[r][LW-1:0]];
            end else begin
              cur_tag[r] <= LW'(s_sel[r] - IW'(L));
              cur_u[r]   <= c_u[s_sel[r] - IW'(L)][k_q[M-1:0]];
              cur_pm[r]  <= c_pm[s_sel[r] - IW'(L)][k_q[M-1:0]];
            end
            cur_ok[r] <= s_sel_ok[r];
          end
          sorted <= 1'b1;
          rounds <= rounds + 1'b1;
          k_q    <= next_pattern(k_q, unrel_q);
          if (next_pattern(k_q, unrel_q) == (M + 1)'(NC)) state <= S_COMMIT;
        end
        S_COMMIT: begin
          for (int l = 0; l < L; l++) pm[l] <= cur_pm[l] - pm_min;
          valid <= cur_ok;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
