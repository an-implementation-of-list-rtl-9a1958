// lscd_pmu: path-metric update of low-complexity list management (LCLM)
// for one path and one M-bit sub-tree.
//
// Multi-bit decoding gives every choice u of the M bits of the sub-tree the
// metric  pm_in + sum_i (v_i xor [L_i < 0]) * |L_i|,  v = u * F^{(x)m}.
// Frozen bits are held at 0. Selective expansion splits the information
// bits into unreliable ones (both values kept as separate candidates) and
// reliable ones (not expanded); for each value pattern k of the unreliable
// bits, LCLM keeps the minimum metric over all values of the reliable bits.
// Candidate k (k = 0 .. 2^M-1, read as a bit mask over the M positions) is
// valid when its set bits are all unreliable positions; it carries the
// minimum metric and the M-bit u that reached it (lowest u wins a tie).
// There are 2^Mu valid candidates, Mu = number of unreliable bits.
//
// Purely combinational. Metrics saturate at 2^QPM - 1.
//
// Metric computation over all 2^M decisions of a 4-bit leaf with reliable
// bits decided by their best value follows the published PMU; the lowest-u
// tie rule and the saturation point are this design's own choices.
module lscd_pmu
  import lscd_pkg::*;
#(
  parameter int unsigned MLOG = 2,
  parameter int unsigned QPM  = 9,
  localparam int unsigned Q   = 8,
  localparam int unsigned M   = 1 << MLOG,
  localparam int unsigned NC  = 1 << M
) (
  input  logic [M-1:0][Q-1:0]        llr,
  input  bit_type_e [M-1:0]          btype,
  input  logic [QPM-1:0]             pm_in,
  input  logic                       valid_in,
  output logic [NC-1:0]              cand_ok,
  output logic [NC-1:0][QPM-1:0]     cand_pm,
  output logic [NC-1:0][M-1:0]       cand_u
);

  localparam int unsigned SW = QPM + MLOG + Q;

  logic [M-1:0]    frozen, unrel;
  logic [NC-1:0][SW-1:0] metric;

  always_comb begin
    for (int i = 0; i < M; i++) begin
      frozen[i] = (btype[i] == BT_FROZEN);
      unrel[i]  = (btype[i] == BT_UNRELIABLE);
    end
    for (int u = 0; u < NC; u++) begin
      logic [15:0] v;
      v = polar_xform(16'(u), M);
      metric[u] = SW'(pm_in);
      for (int i = 0; i < M; i++)
        if (v[i] != llr[i][Q-1])
          metric[u] += SW'(llr[i][Q-1] ? 8'(-llr[i]) : llr[i]);
    end
    for (int k = 0; k < NC; k++) begin
      logic          found;
      logic [SW-1:0] best;
      logic [M-1:0]  bu;
      found = 1'b0;
      best  = '0;
      bu    = '0;
      for (int u = 0; u < NC; u++) begin
        if (((M'(u) & frozen) == '0) && ((M'(u) & unrel) == (M'(k) & unrel)) &&
            (!found || metric[u] < best)) begin
          found = 1'b1;
          best  = metric[u];
          bu    = M'(u);
        end
      end
      cand_ok[k] = valid_in && found && ((M'(k) & ~unrel) == '0);
      cand_pm[k] = (best > SW'({QPM{1'b1}})) ? {QPM{1'b1}} : best[QPM-1:0];
      cand_u[k]  = bu;
    end
  end

endmodule
