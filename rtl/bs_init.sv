// bs_init: initial barrel shifters (BS_INIT) between the input buffer and the
// AP-LLR memory.
//
// Column j of the input word is rotated by the shift of the last non-negative
// entry of base-matrix column j, so that the AP-LLR memory starts out aligned
// as if the last layer of a previous iteration had just been processed. The
// BS_R shifts of every layer are then relative to the previous entry of each
// column, and no shifter is needed on the write-back path. The shift amounts
// are constants of the code, so this is wiring only. The q-bit LLRs are
// sign-extended to the q~-bit AP-LLR format. Combinational.
module bs_init #(
  parameter int Z  = ldpc_pkg::Z_DEF,
  parameter int C  = ldpc_pkg::C_COLS,
  parameter int QB = ldpc_pkg::Q_BITS,
  parameter int QTB = ldpc_pkg::QT_BITS
) (
  input  logic [C-1:0][Z-1:0][QB-1:0]  llr,
  output logic [C-1:0][Z-1:0][QTB-1:0] ap
);
  for (genvar j = 0; j < C; j++) begin : g_col
    localparam int SH = ldpc_pkg::last_shift(j, Z);
    for (genvar r = 0; r < Z; r++) begin : g_el
      assign ap[j][r] = QTB'($signed(llr[j][(r + SH) % Z]));
    end
  end
endmodule
