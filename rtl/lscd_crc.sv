// lscd_crc: CRC unit of the CRC-aided list decoder.
//
// Keeps one R-bit CRC register per path. At every list-management commit,
// new path l takes the register of the path it came from (tag[l]) and shifts
// in the information bits among its M new bits, in index order, through the
// generator polynomial (MSB-first, initial value 0, no final xor). The last
// R information bits of the code carry the checksum of the others, so a path
// whose register is 0 after the last bit passes the check.
//
// Path selection (combinational): among the valid paths that pass, the one
// with the smallest path metric (lowest index on a tie); if none passes, the
// path with the smallest metric overall, with sel_pass low.
//
// Timing: init and commit act at the clock edge; init clears all registers.
//
// The per-path CRC and the CRC-aided choice follow the published decoder; the
// register bit order, the zero initial value and the lowest-index tie rule are
// this design's own choices.
module lscd_crc
  import lscd_pkg::*;
#(
  parameter int unsigned L     = 32,
  parameter int unsigned MLOG  = 2,
  parameter int unsigned QPM   = 9,
  parameter int unsigned R     = 24,
  parameter logic [R-1:0] POLY = R'(24'h864cfb),
  localparam int unsigned M    = 1 << MLOG,
  localparam int unsigned LW   = (L > 1) ? $clog2(L) : 1
) (
  input  logic                   clk,
  input  logic                   init,
  input  logic                   commit,
  input  logic [L-1:0][LW-1:0]   tag,
  input  logic [L-1:0][M-1:0]    u,
  input  bit_type_e [M-1:0]      btype,
  input  logic [L-1:0]           valid,
  input  logic [L-1:0][QPM-1:0]  pm,
  output logic [LW-1:0]          sel_path,
  output logic                   sel_pass,
  output logic [L-1:0]           pass
);

  logic [L-1:0][R-1:0] crc;

  function automatic logic [R-1:0] crc_step(input logic [R-1:0] c, input logic b);
    logic fb;
    fb = c[R-1] ^ b;
    return {c[R-2:0], 1'b0} ^ (fb ? POLY : '0);
  endfunction

  always_ff @(posedge clk) begin
    if (init) begin
      crc <= '0;
    end else if (commit) begin
      for (int l = 0; l < L; l++) begin
        logic [R-1:0] c;
        c = crc[tag[l]];
        for (int i = 0; i < M; i++)
          if (btype[i] != BT_FROZEN) c = crc_step(c, u[l][i]);
        crc[l] <= c;
      end
    end
  end

  always_comb begin
    logic           found_p, found_a;
    logic [QPM-1:0] best_p, best_a;
    logic [LW-1:0]  idx_p, idx_a;
    found_p = 1'b0; found_a = 1'b0;
    best_p = '0; best_a = '0; idx_p = '0; idx_a = '0;
    for (int l = 0; l < L; l++) begin
      pass[l] = valid[l] && (crc[l] == '0);
      if (valid[l] && (!found_a || pm[l] < best_a)) begin
        found_a = 1'b1; best_a = pm[l]; idx_a = LW'(l);
      end
      if (pass[l] && (!found_p || pm[l] < best_p)) begin
        found_p = 1'b1; best_p = pm[l]; idx_p = LW'(l);
      end
    end
    sel_pass = found_p;
    sel_path = found_p ? idx_p : idx_a;
  end

endmodule
