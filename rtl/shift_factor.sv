// shift_factor: per-layer table of lane-to-column mapping and BS_R shifts.
//
// For the layer number given on layer, lane k (0..DC-1) processes base-matrix
// column col[k] (the k-th non-negative entry of the row, columns ascending),
// and its AP-LLR block must be rotated by shift[k] = b(l,j) - b(l',j) mod Z,
// where l' is the previous layer (cyclically) with a non-negative entry in
// column j. Both tables are computed at elaboration from the base matrix in
// ldpc_pkg, as the architecture computes them offline. Combinational ROM.
module shift_factor #(
  parameter int Z = ldpc_pkg::Z_DEF,
  localparam int L  = ldpc_pkg::N_LAYERS,
  localparam int DC = ldpc_pkg::DC,
  localparam int C  = ldpc_pkg::C_COLS,
  localparam int LW = $clog2(L),
  localparam int CW = $clog2(C),
  localparam int SW = (Z > 1) ? $clog2(Z) : 1
) (
  input  logic [LW-1:0]          layer,
  output logic [DC-1:0][CW-1:0]  col,
  output logic [DC-1:0][SW-1:0]  shift
);
  logic [L-1:0][DC-1:0][CW-1:0] col_rom;
  logic [L-1:0][DC-1:0][SW-1:0] sh_rom;

  for (genvar l = 0; l < L; l++) begin : g_l
    for (genvar k = 0; k < DC; k++) begin : g_k
      assign col_rom[l][k] = CW'(ldpc_pkg::LAYER_COL[l][k]);
      assign sh_rom[l][k]  = SW'(ldpc_pkg::bsr_shift(l, k, Z));
    end
  end

  always_comb begin
    col   = '0;
    shift = '0;
    if (int'(layer) < L) begin
      col   = col_rom[layer];
      shift = sh_rom[layer];
    end
  end
endmodule
