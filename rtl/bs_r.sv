// bs_r: read barrel shifters BS_R_1..BS_R_DC.
//
// Each lane's AP-LLR block is rotated by its per-layer shift so that element r
// lines up with check node r of the layer. Because the memory holds every
// column aligned to the last layer that used it, the shift is the difference
// between the current and the previous shift factor of the column (see
// shift_factor). One cyclic_shifter per lane. Combinational.
module bs_r #(
  parameter int Z   = ldpc_pkg::Z_DEF,
  parameter int QTB = ldpc_pkg::QT_BITS,
  localparam int DC = ldpc_pkg::DC,
  localparam int SW = (Z > 1) ? $clog2(Z) : 1
) (
  input  logic [DC-1:0][Z-1:0][QTB-1:0] din,
  input  logic [DC-1:0][SW-1:0]         shift,
  output logic [DC-1:0][Z-1:0][QTB-1:0] dout
);
  for (genvar k = 0; k < DC; k++) begin : g_lane
    cyclic_shifter #(.Z(Z), .WD(QTB)) u_bs (
      .din(din[k]), .shift(shift[k]), .dout(dout[k]));
  end
endmodule
