// tb_lscd_llr_ram: test of the LLR RAM bank (P = 16, 2P lanes, 24 rows).
//
// Random reads and per-lane masked writes; a behavioural copy of the memory
// predicts every read word (registered, one cycle after re; rdata holds when
// re is low). Stimulus changes 1 time unit after the clock edge.
//
// The behaviour checked is the one described for the block in the published
// decoder; the reduced sizes and the stimulus are this testbench's own.
module tb_lscd_llr_ram;
  localparam int P = 16, Q = 8, ROWS = 24, AW = 5;
  logic clk = 1'b0;
  logic re = 1'b0;
  logic [AW-1:0] raddr = '0, waddr = '0;
  logic [2*P-1:0][Q-1:0] rdata, wdata = '0;
  logic [2*P-1:0] wen = '0;
  logic [2*P-1:0][Q-1:0] model [ROWS];
  logic [2*P-1:0][Q-1:0] expd;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  lscd_llr_ram #(.P(P), .Q(Q), .ROWS(ROWS)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill every row
    #1;
    for (int r = 0; r < ROWS; r++) begin
      waddr = AW'(r); wen = '1;
      for (int i = 0; i < 2 * P; i++) wdata[i] = Q'($urandom);
      model[r] = wdata;
      @(posedge clk); #1;
    end
    wen = '0;
    for (int it = 0; it < 3000; it++) begin
      bit do_rd;
      do_rd = (it == 0) || $urandom_range(3, 0) != 0;
      re = do_rd;
      raddr = AW'($urandom_range(ROWS - 1, 0));
      waddr = AW'($urandom_range(ROWS - 1, 0));
      wen = {$urandom, $urandom} & ($urandom_range(1, 0) ? '1 : '0);
      for (int i = 0; i < 2 * P; i++) wdata[i] = Q'($urandom);
      if (do_rd) expd = model[raddr];     // read-before-write at the same edge
      for (int i = 0; i < 2 * P; i++) if (wen[i]) model[waddr][i] = wdata[i];
      @(posedge clk); #1;
      checks++;
      if (rdata !== expd) begin
        failures++;
        if (failures < 5) $display("iteration %0d: read word differs", it);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
