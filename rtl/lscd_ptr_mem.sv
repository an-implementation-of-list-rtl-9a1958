// lscd_ptr_mem: pointer memory of the list decoder.
//
// For every path l and every stage k (m <= k <= n-1) it holds the slot whose
// stored data (LLRs of the stage-k node, partial sums and decoded bits of the
// stage-k left sub-tree) belong to the history of path l. One register of
// (n-m)*log2(L) bits per path, as in the paper's "nl-bit reg." blocks.
//
// * set_stage: when a node of stage k is computed, every path writes its own
//   slot, so ptr[l][k] becomes l for all l.
// * commit: after list management, new path l continues old path tag[l], so
//   it inherits the whole pointer register of tag[l]. Only these pointers are
//   permuted; the LLRs, partial sums and decoded bits stay where they are.
// set_stage and commit are never given in the same cycle by the controller;
// if they are, commit wins.
//
// The whole register file is visible on ptr (read by address by the other
// blocks). Updates take effect at the clock edge. Not reset: every pointer is
// written by set_stage before it is read in a frame.
module lscd_ptr_mem #(
  parameter int unsigned L    = 32,
  parameter int unsigned NL   = 12,
  localparam int unsigned LW  = (L > 1) ? $clog2(L) : 1,
  localparam int unsigned SW  = $clog2(NL + 1)
) (
  input  logic                        clk,
  input  logic                        set_stage,
  input  logic [SW-1:0]               stage,
  input  logic                        commit,
  input  logic [L-1:0][LW-1:0]        tag,
  output logic [L-1:0][NL-1:0][LW-1:0] ptr   // ptr[l][k], k < m unused
);

  always_ff @(posedge clk) begin
    if (commit) begin
      for (int l = 0; l < L; l++) ptr[l] <= ptr[tag[l]];
    end else if (set_stage) begin
      for (int l = 0; l < L; l++) ptr[l][stage] <= LW'(l);
    end
  end

endmodule
