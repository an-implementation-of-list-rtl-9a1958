// tb_lscd_pmu: test of the path-metric unit (M = 4, Q_PM = 9).
//
// For random LLRs, bit types and input metrics, the expected candidate of
// every unreliable-bit pattern k is found by brute force over all 2^M
// decisions u: frozen bits must be 0, the unreliable bits must equal k, the
// metric is pm_in plus the sum of |LLR| over the positions where the
// re-encoded bit v = u * F^{(x)2} disagrees with the hard decision, the
// lowest metric wins (lowest u on a tie) and saturates at 2^Q_PM - 1.
// Patterns with bits outside the unreliable set, and invalid input paths,
// must be flagged as not usable.
//
// The behaviour checked is the one described for the block in the published
// decoder; the reduced sizes and the stimulus are this testbench's own.
module tb_lscd_pmu;
  import lscd_pkg::*;
  localparam int MLOG = 2, QPM = 9, Q = 8, M = 4, NC = 16;
  logic [M-1:0][Q-1:0] llr;
  bit_type_e [M-1:0] btype;
  logic [QPM-1:0] pm_in;
  logic valid_in;
  logic [NC-1:0] cand_ok;
  logic [NC-1:0][QPM-1:0] cand_pm;
  logic [NC-1:0][M-1:0] cand_u;
  int checks = 0, failures = 0;

  lscd_pmu #(.MLOG(MLOG), .QPM(QPM)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 4000; it++) begin
      int fmask, umask, a [M];
      fmask = 0; umask = 0;
      for (int i = 0; i < M; i++) begin
        int t;
        t = $urandom_range(2, 0);
        btype[i] = bit_type_e'(t);
        if (t == 0) fmask |= 1 << i;
        if (t == 2) umask |= 1 << i;
        a[i] = $urandom_range(254, 0) - 127;
        if (it % 5 == 0) a[i] = a[i] / 16;
        llr[i] = Q'(a[i]);
      end
      valid_in = $urandom_range(7, 0) != 0;
      pm_in = QPM'((it % 4 == 0) ? $urandom_range(511, 400) : $urandom_range(511, 0));
      #1;
      for (int k = 0; k < NC; k++) begin
        bit found; int best, bu, e_pm;
        found = 0; best = 0; bu = 0;
        for (int uu = 0; uu < NC; uu++) begin
          int met; bit v [M];
          if ((uu & fmask) != 0 || (uu & umask) != (k & umask)) continue;
          for (int j = 0; j < M; j++) begin
            v[j] = 0;
            for (int i = 0; i < M; i++) if ((i & j) == j) v[j] ^= (uu >> i) & 1;
          end
          met = int'(pm_in);
          for (int i = 0; i < M; i++) if (v[i] != (a[i] < 0)) met += (a[i] < 0) ? -a[i] : a[i];
          if (!found || met < best) begin found = 1; best = met; bu = uu; end
        end
        checks++;
        if (cand_ok[k] !== (valid_in && found && (k & ~umask) == 0)) begin
          failures++;
          if (failures < 5) $display("iteration %0d pattern %0d: usable flag wrong", it, k);
        end else if (cand_ok[k]) begin
          e_pm = best > 511 ? 511 : best;
          checks++;
          if (int'(cand_pm[k]) != e_pm || int'(cand_u[k]) != bu) begin
            failures++;
            if (failures < 5) $display("iteration %0d pattern %0d: pm %0d u %0d, expected pm %0d u %0d",
                                       it, k, cand_pm[k], cand_u[k], e_pm, bu);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
