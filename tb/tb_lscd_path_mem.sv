// tb_lscd_path_mem: test of the path memory on a random list decoding
// history (N = 64, L = 4, P = 16, m = 2, eps = 3).
//
// The testbench keeps, for every path, its whole decoded vector, and copies
// it at each list step (random parents, random new bits), while the memory
// only receives the store commands of the G nodes (serial for stages above
// eps, parallel below), the pointers of the lazy-copy rule and the new bits.
// At the end of each decoded frame every path's vector is read out, P bits
// per cycle, and compared with the kept copy. Stimulus changes 1 time unit
// after the clock edge.
//
// The behaviour checked is the one described for the block in the published
// decoder; the reduced sizes and the stimulus are this testbench's own.
module tb_lscd_path_mem;
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
  logic rd_en = 1'b0;
  logic [LW-1:0] rd_path = '0;
  logic [1:0] rd_chunk = '0;
  logic [P-1:0] rd_data;

  always #5 clk = ~clk;

  lscd_path_mem #(.N(N), .L(L), .P(P), .MLOG(MLOG), .EPS(EPS)) dut (.*);

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
              sr_en <= 1'b1; sr_path <= LW'(l); sr_stage <= 3'(stop); sr_chunk <= 2'(c);
              @(posedge clk);
              #1;
            end
          sr_en <= 1'b0;
        end else begin
          pr_en <= 1'b1; pr_stage <= 3'(stop);
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
      if (j == N / M - 1)
        for (int l = 0; l < L; l++)
          for (int c = 0; c < N / P; c++) begin
            rd_en = 1'b1; rd_path = LW'(l); rd_chunk = 2'(c);
            @(posedge clk);
            #1;
            rd_en = 1'b0;
            for (int i = 0; i < P; i++) begin
              checks++;
              if (rd_data[i] !== uv[l][c * P + i]) begin
                failures++;
                if (failures < 10) $display("rep %0d path %0d bit %0d: %0d, expected %0d", rep, l, c * P + i, rd_data[i], uv[l][c * P + i]);
              end
            end
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
