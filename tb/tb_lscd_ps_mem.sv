// tb_lscd_ps_mem: test of the partial-sum memory on a random list decoding
// history (N = 64, L = 4, P = 16, m = 2, eps = 3).
//
// The testbench keeps, for every path, its whole decoded vector, and copies
// it at each list step (random parents, random new bits). At every G node it
// checks the partial sums delivered by the memory (serial port for stages
// above eps, parallel port below) against the polar transform of the
// decoded bits of the left sibling, computed directly from those vectors.
// The pointers fed to the memory follow the lazy-copy rule of the pointer
// memory, kept by the testbench. Stimulus changes 1 time unit after the
// clock edge.
//
// The behaviour checked is the one described for the block in the published
// decoder; the reduced sizes and the stimulus are this testbench's own.
module tb_lscd_ps_mem;
  import lscd_pkg::*;

  localparam int N = 64, L = 4, P = 16, MLOG = 2, EPS = 3;
  localparam int NL = 6, M = 4, LW = 2, PSW = 8;

  logic clk = 1'b0;
  logic [L-1:0][NL-1:0][LW-1:0] ptr;
  logic commit = 1'b0;
  logic [L-1:0][M-1:0] commit_u = '0;
  logic sr_en = 1'b0, pr_en = 1'b0;
  logic [LW-1:0] sr_path = '0;
  logic [2:0] sr_stage = '0, pr_stage = '0;
  logic [1:0] sr_chunk = '0;
  logic [P-1:0] sr_ps;
  logic [L-1:0][PSW-1:0] pr_ps;

  always #5 clk = ~clk;

  lscd_ps_mem #(.N(N), .L(L), .P(P), .MLOG(MLOG), .EPS(EPS)) dut (.*);

  int checks = 0, failures = 0;
  bit uv [L][N];
  bit nuv [L][N];
  logic [L-1:0][NL-1:0][LW-1:0] nptr;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void expect_beta(input int l, input int s, input int base, output bit b [N]);
    bit v [N];
    for (int i = 0; i < (1 << s); i++) v[i] = uv[l][base - (1 << s) + i];
    for (int h = 1; h < (1 << s); h *= 2)
      for (int i = 0; i < (1 << s); i++)
        if ((i & h) == 0) v[i] ^= v[i + h];
    b = v;
  endfunction

  initial begin
    ptr = '0;
    for (int l = 0; l < L; l++) for (int i = 0; i < N; i++) uv[l][i] = 0;
    @(posedge clk);
              #1;
    for (int rep = 0; rep < 3; rep++)
    for (int j = 0; j < N / M; j++) begin
      int stop, base;
      base = j * M;
      stop = NL - 1;
      if (j != 0) begin
        int t; t = 0;
        while (((j >> t) & 1) == 0) t++;
        stop = MLOG + t;
        // G node at stage stop
        for (int l = 0; l < L; l++) ptr[l][stop] = LW'(l);
        if (stop > EPS) begin
          for (int l = 0; l < L; l++)
            for (int c = 0; c < (((1 << stop) > P) ? (1 << stop) / P : 1); c++) begin
              bit b [N];
              sr_en <= 1'b1; sr_path <= LW'(l); sr_stage <= 3'(stop); sr_chunk <= 2'(c);
              @(posedge clk);
              #1;
              expect_beta(l, stop, base, b);
              for (int i = 0; i < P; i++)
                if (c * P + i < (1 << stop)) begin
                  checks++;
                  if (sr_ps[i] !== b[c * P + i]) begin
                    failures++;
                    $display("rep %0d j %0d path %0d stage %0d bit %0d: %0d, expected %0d", rep, j, l, stop, c * P + i, sr_ps[i], b[c * P + i]);
                  end
                end
            end
          sr_en <= 1'b0;
        end else begin
          pr_en <= 1'b1; pr_stage <= 3'(stop);
                    #1;
          for (int l = 0; l < L; l++) begin
            bit b [N];
            expect_beta(l, stop, base, b);
            for (int i = 0; i < (1 << stop); i++) begin
              checks++;
              if (pr_ps[l][i] !== b[i]) begin
                failures++;
                $display("j %0d path %0d low stage %0d bit %0d wrong", j, l, stop, i);
              end
            end
          end
          @(posedge clk);
              #1;
          pr_en <= 1'b0;
        end
      end
      for (int s = stop - 1; s >= MLOG; s--)
        for (int l = 0; l < L; l++) ptr[l][s] = LW'(l);
      // list step: random parents and bits
      for (int l = 0; l < L; l++) begin
        int t;
        t = (j == 0 && rep == 0) ? 0 : $urandom_range(L - 1, 0);
        nptr[l] = ptr[t];
        nuv[l] = uv[t];
        commit_u[l] = M'($urandom);
        for (int i = 0; i < M; i++) nuv[l][base + i] = commit_u[l][i];
      end
      commit <= 1'b1;
      @(posedge clk);
              #1;
      commit <= 1'b0;
      ptr = nptr;
      uv = nuv;
      @(posedge clk);
                #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
