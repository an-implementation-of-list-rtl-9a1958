// tb_lscd_crc: test of the per-path CRC unit and the final path choice
// (L = 8, M = 4, 8-bit CRC with polynomial 0x07).
//
// Random list histories (random parent tags, decided bits and bit types per
// commit) are mirrored by a behavioural model keeping each path's full
// information-bit sequence; the expected CRC of a path is recomputed from
// its sequence. After every commit the pass flags are compared, and the
// chosen path must be the smallest-metric valid path among the passing ones
// (lowest index on a tie), or the smallest-metric valid path if none passes.
// Stimulus changes 1 time unit after the clock edge.
//
// The behaviour checked is the one described for the block in the published
// decoder; the reduced sizes and the stimulus are this testbench's own.
module tb_lscd_crc;
  import lscd_pkg::*;
  localparam int L = 8, MLOG = 2, QPM = 9, R = 8, M = 4, LW = 3;
  localparam logic [R-1:0] POLY = 8'h07;
  logic clk = 1'b0, init = 1'b0, commit = 1'b0;
  logic [L-1:0][LW-1:0] tag = '0;
  logic [L-1:0][M-1:0] u = '0;
  bit_type_e [M-1:0] btype;
  logic [L-1:0] valid = '0;
  logic [L-1:0][QPM-1:0] pm = '0;
  logic [LW-1:0] sel_path;
  logic sel_pass;
  logic [L-1:0] pass;
  int checks = 0, failures = 0;
  bit seq [L][$];

  always #5 clk = ~clk;
  lscd_crc #(.L(L), .MLOG(MLOG), .QPM(QPM), .R(R), .POLY(POLY)) dut (.*);

  function automatic logic [R-1:0] crc_of(bit s [$]);
    logic [R-1:0] c;
    c = '0;
    foreach (s[i]) c = {c[R-2:0], 1'b0} ^ ((c[R-1] ^ s[i]) ? POLY : '0);
    return c;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    btype = '0;
    #1;
    for (int fr = 0; fr < 60; fr++) begin
      init = 1'b1;
      for (int l = 0; l < L; l++) seq[l].delete();
      @(posedge clk); #1;
      init = 1'b0;
      for (int st = 0; st < 12; st++) begin
        bit ns [L][$];
        for (int i = 0; i < M; i++) btype[i] = bit_type_e'($urandom_range(2, 0));
        for (int l = 0; l < L; l++) begin
          tag[l] = LW'($urandom_range(L - 1, 0));
          u[l] = M'($urandom);
          ns[l] = seq[tag[l]];
          for (int i = 0; i < M; i++) if (btype[i] != BT_FROZEN) ns[l].push_back(u[l][i]);
        end
        commit = 1'b1;
        @(posedge clk); #1;
        commit = 1'b0;
        seq = ns;
        // random validity and metrics, few values so ties happen
        for (int l = 0; l < L; l++) begin
          valid[l] = $urandom_range(3, 0) != 0;
          pm[l] = QPM'($urandom_range(7, 0));
        end
        #1;
        begin
          int bp, ba, e_sel;
          bp = -1; ba = -1;
          for (int l = 0; l < L; l++) begin
            bit p;
            p = valid[l] && crc_of(seq[l]) == '0;
            checks++;
            if (pass[l] !== p) begin
              failures++;
              if (failures < 5) $display("frame %0d step %0d path %0d: pass %0d, expected %0d", fr, st, l, pass[l], p);
            end
            if (valid[l] && (ba < 0 || pm[l] < pm[ba])) ba = l;
            if (p && (bp < 0 || pm[l] < pm[bp])) bp = l;
          end
          if (ba >= 0) begin
            e_sel = (bp >= 0) ? bp : ba;
            checks++;
            if (int'(sel_path) != e_sel || sel_pass !== (bp >= 0)) begin
              failures++;
              if (failures < 5) $display("frame %0d step %0d: chose %0d, expected %0d", fr, st, sel_path, e_sel);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
