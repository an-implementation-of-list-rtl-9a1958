// tb_lscd_ptr_mem: test of the lazy-copy pointer memory (L = 8, n = 7).
//
// Random sequences of stage sets (ptr[l][k] = l) and commits with random
// parent tags (ptr[l] = ptr[tag[l]]), including both at the same edge
// (commit wins), against a behavioural model; every pointer is compared
// after every edge. Stimulus changes 1 time unit after the clock edge.
//
// The behaviour checked is the one described for the block in the published
// decoder; the reduced sizes and the stimulus are this testbench's own.
module tb_lscd_ptr_mem;
  localparam int L = 8, NL = 7, LW = 3, SW = 3;
  logic clk = 1'b0;
  logic set_stage = 1'b0, commit = 1'b0;
  logic [SW-1:0] stage = '0;
  logic [L-1:0][LW-1:0] tag = '0;
  logic [L-1:0][NL-1:0][LW-1:0] ptr, model, nm;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  lscd_ptr_mem #(.L(L), .NL(NL)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1;
    // define every entry first
    set_stage = 1'b1;
    for (int k = 0; k < NL; k++) begin
      stage = SW'(k);
      for (int l = 0; l < L; l++) model[l][k] = LW'(l);
      @(posedge clk); #1;
    end
    for (int it = 0; it < 2000; it++) begin
      set_stage = $urandom_range(1, 0);
      commit    = $urandom_range(2, 0) == 0;
      stage     = SW'($urandom_range(NL - 1, 0));
      for (int l = 0; l < L; l++) tag[l] = LW'($urandom_range(L - 1, 0));
      nm = model;
      if (commit) for (int l = 0; l < L; l++) nm[l] = model[tag[l]];
      else if (set_stage) for (int l = 0; l < L; l++) nm[l][stage] = LW'(l);
      model = nm;
      @(posedge clk); #1;
      checks++;
      if (ptr !== model) begin
        failures++;
        if (failures < 5) $display("iteration %0d: pointers differ", it);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
