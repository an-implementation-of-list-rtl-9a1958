// lscd_sorter: radix-2L parallel sorter of list pruning.
//
// Selects the L smallest of 2L path metrics in one combinational step, the
// way a parallel (radix-2L) sorter does: every pair of inputs is compared
// (each input has its own row of 2L comparators; synthesis may share the
// mirrored pairs), the rank of input i is the number of inputs
// that beat it, and output position r takes the input of rank r. Invalid
// inputs lose to every valid one; equal keys are ordered by input index, so
// ranks are unique and the lower index wins a tie.
//
// Outputs: sel[r] is the index of the input of rank r (r < L), sel_ok[r] its
// valid flag. Ranks are ascending, so sel[0] is the best input.
//
// The radix-2L parallel sorter follows the published list manager; the
// rank-counting structure and index tie order are this design's own choices.
module lscd_sorter #(
  parameter int unsigned L   = 32,
  parameter int unsigned QPM = 9,
  localparam int unsigned NI = 2 * L,
  localparam int unsigned IW = $clog2(NI)
) (
  input  logic [NI-1:0]            in_ok,
  input  logic [NI-1:0][QPM-1:0]   in_pm,
  output logic [L-1:0][IW-1:0]     sel,
  output logic [L-1:0]             sel_ok
);

  logic [NI-1:0][NI-1:0] beats;   // beats[i][j]: input j ranks before input i
  logic [NI-1:0][IW:0]   rank;

  // one comparator row and one population count per input
  for (genvar i = 0; i < NI; i++) begin : g_rank
    always_comb begin
      logic [QPM:0] ki, kj;
      ki = {~in_ok[i], in_pm[i]};
      rank[i] = '0;
      for (int j = 0; j < NI; j++) begin
        kj = {~in_ok[j], in_pm[j]};
        beats[i][j] = (j != i) && ((kj < ki) || (kj == ki && j < i));
        rank[i] += (IW + 1)'(beats[i][j]);
      end
    end
  end

  // output r takes the input of rank r
  for (genvar r = 0; r < L; r++) begin : g_sel
    always_comb begin
      sel[r]    = '0;
      sel_ok[r] = 1'b0;
      for (int i = 0; i < NI; i++)
        if (rank[i] == (IW + 1)'(r)) begin
          sel[r]    = IW'(i);
          sel_ok[r] = in_ok[i];
        end
    end
  end

endmodule
