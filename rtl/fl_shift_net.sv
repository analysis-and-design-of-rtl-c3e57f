// fl_shift_net: the permutation / barrel-shift networks of the full-layer
// decoder: PER_1/BS_1, PER_WR/BS_WR and PER_L/BS_L (inverse).
//
// A full layer is RPL = 4 consecutive base-matrix rows; every column has
// exactly one non-negative entry in it. Slot s = 6 r + k of full layer f
// carries column col(f, s) = LAYER_COL[4f + r][k], rotated by its shift
// b(f, s) (element e of the slot is element (e + b) mod Z of the column), so
// that the CNUs of row r find their six inputs in slots 6r .. 6r+5.
//   PER_1/BS_1  (first): input word -> slots of full layer 0, with sign
//               extension from q to q~ bits. Fixed wiring.
//   PER_WR/BS_WR (next): AP-LLRs in the slot order / alignment of layer f ->
//               slot order / alignment of layer f+1 (mod 3): slot s' takes the
//               slot of layer f holding the same column, rotated by
//               b(f+1, s') - b(f, src) mod Z. Both depend on f at run time,
//               so each slot has a 3-way source multiplexer and one
//               cyclic_shifter with a per-layer constant shift.
//   PER_L/BS_L  (bits): signs of AP-LLRs in the order of the last layer back
//               to codeword order: bits[j][m] = sign of slot(j) element
//               (m - b) mod Z. Fixed wiring.
// Purely combinational. Which networks exist, and what each one undoes or
// prepares, follows the full-layer architecture's description; slot order
// (row-major, ascending column in a row) and the rotation convention are
// this design's choices.
module fl_shift_net #(
  parameter int Z   = ldpc_pkg::Z_DEF,
  parameter int QB  = ldpc_pkg::Q_BITS,
  parameter int QTB = ldpc_pkg::QT_BITS,
  localparam int C  = ldpc_pkg::C_COLS,
  localparam int LF = ldpc_pkg::N_LAYERS / ldpc_pkg::RPL_FULL,
  localparam int LW = $clog2(LF),
  localparam int SW = (Z > 1) ? $clog2(Z) : 1
) (
  input  logic [C-1:0][Z-1:0][QB-1:0]  llr,
  output logic [C-1:0][Z-1:0][QTB-1:0] first,
  input  logic [LW-1:0]                layer,
  input  logic [C-1:0][Z-1:0][QTB-1:0] ap,
  output logic [C-1:0][Z-1:0][QTB-1:0] next,
  output logic [C-1:0][Z-1:0]          bits
);
  import ldpc_pkg::*;

  // PER_1 / BS_1
  for (genvar s = 0; s < C; s++) begin : g_first
    localparam int J = fl_col(0, s);
    localparam int B = fl_shift(0, s, Z);
    for (genvar e = 0; e < Z; e++) begin : g_e
      assign first[s][e] = QTB'($signed(llr[J][(e + B) % Z]));
    end
  end

  // PER_WR / BS_WR
  for (genvar s = 0; s < C; s++) begin : g_next
    logic [Z-1:0][QTB-1:0] src;
    logic [SW-1:0]         sh;
    always_comb begin
      src = ap[0];
      sh  = '0;
      for (int f = 0; f < LF; f++) begin
        if (layer == LW'(f)) begin
          src = ap[fl_slot(f, fl_col((f + 1) % LF, s))];
          sh  = SW'(fl_wr_shift(f, s, Z));
        end
      end
    end
    cyclic_shifter #(.Z(Z), .WD(QTB)) u_bs_wr (.din(src), .shift(sh), .dout(next[s]));
  end

  // PER_L / BS_L (inverse, sign bits only)
  for (genvar j = 0; j < C; j++) begin : g_bits
    localparam int S = fl_slot(LF - 1, j);
    localparam int B = fl_shift(LF - 1, S, Z);
    for (genvar m = 0; m < Z; m++) begin : g_m
      assign bits[j][m] = ap[S][(m - B + Z) % Z][QTB-1];
    end
  end
endmodule
