// bs_init_inv: inverse initial shifters (BS_INIT with an overbar) and hard decision.
//
// At the end of decoding each AP-LLR block is aligned to the last layer that
// used its column, i.e. rotated like BS_INIT rotated it. This block takes the
// sign bit of every AP-LLR (1 = negative = bit 1, zero decides 0) and rotates
// each column back by the same constant, giving the hard-decision codeword in
// natural order. Wiring only. Combinational.
module bs_init_inv #(
  parameter int Z   = ldpc_pkg::Z_DEF,
  parameter int C   = ldpc_pkg::C_COLS,
  parameter int QTB = ldpc_pkg::QT_BITS
) (
  input  logic [C-1:0][Z-1:0][QTB-1:0] ap,
  output logic [C-1:0][Z-1:0]          bits
);
  for (genvar j = 0; j < C; j++) begin : g_col
    localparam int SH = ldpc_pkg::last_shift(j, Z);
    for (genvar n = 0; n < Z; n++) begin : g_el
      assign bits[j][n] = ap[j][(n - SH + Z) % Z][QTB-1];
    end
  end
endmodule
