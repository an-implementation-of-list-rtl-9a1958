// lscd_llr_ram: one LLR RAM block of the parallel-F serial-G (PFSG) stage.
//
// A simple dual-port RAM whose read port returns a whole row of 2P LLRs
// (2PQ bits) and whose write port stores up to P LLRs (PQ bits) per cycle,
// as in the PFSG structure. The row of a node holds the first half of the
// node in lanes [0,P) and the second half in lanes [P,2P), so one read
// delivers both operands (La, Lb) of P F- or G-functions. The write port has
// one enable per lane so that a short node (fewer than 2P LLRs) can place its
// two halves in the two halves of one row.
//
// Timing: synchronous read with one cycle of latency; write at the clock edge.
// A read of the row being written in the same cycle returns the old data.
// The RAM contents are not reset.
//
// The 2PQ-bit read port and PQ-bit write port follow the published design;
// the one-cycle read latency, per-lane enables and the row layout are this
// design's own choices.
module lscd_llr_ram #(
  parameter int unsigned P     = 128,
  parameter int unsigned Q     = 8,
  parameter int unsigned ROWS  = 160,
  localparam int unsigned AW   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic                     clk,
  input  logic                     re,
  input  logic [AW-1:0]            raddr,
  output logic [2*P-1:0][Q-1:0]    rdata,
  input  logic [AW-1:0]            waddr,
  input  logic [2*P-1:0]           wen,    // per-lane write enable
  input  logic [2*P-1:0][Q-1:0]    wdata
);

  logic [2*P-1:0][Q-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
    for (int i = 0; i < 2 * P; i++)
      if (wen[i]) mem[waddr][i] <= wdata[i];
  end

endmodule
