// tb_lscd_sorter: test of the 2L-to-L selection network (L = 8).
//
// Random validity flags and metrics (narrow metric range so that ties are
// frequent); the expected output is the first L entries of a stable sort on
// (invalid, metric), i.e. valid entries first, smaller metric first, lower
// index first on a tie. Every output index and flag is compared.
//
// The behaviour checked is the one described for the block in the published
// decoder; the reduced sizes and the stimulus are this testbench's own.
module tb_lscd_sorter;
  localparam int L = 8, QPM = 9, NI = 16, IW = 4;
  logic [NI-1:0] in_ok;
  logic [NI-1:0][QPM-1:0] in_pm;
  logic [L-1:0][IW-1:0] sel;
  logic [L-1:0] sel_ok;
  int checks = 0, failures = 0;

  lscd_sorter #(.L(L), .QPM(QPM)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 3000; it++) begin
      int order [NI];
      int range;
      range = (it % 3 == 0) ? 4 : 511;
      for (int i = 0; i < NI; i++) begin
        in_ok[i] = $urandom_range(3, 0) != 0;
        in_pm[i] = QPM'($urandom_range(range, 0));
        order[i] = i;
      end
      // stable insertion sort on (invalid, metric)
      for (int i = 1; i < NI; i++)
        for (int j = i; j > 0; j--) begin
          int a, b;
          a = order[j - 1]; b = order[j];
          if ({~in_ok[b], in_pm[b]} < {~in_ok[a], in_pm[a]}) begin
            order[j - 1] = b; order[j] = a;
          end
        end
      #1;
      for (int r = 0; r < L; r++) begin
        checks++;
        if (int'(sel[r]) != order[r] || sel_ok[r] !== in_ok[order[r]]) begin
          failures++;
          if (failures < 5) $display("iteration %0d output %0d: %0d, expected %0d", it, r, sel[r], order[r]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
