// per_r: read permutation (PER_R).
//
// Routes the AP-LLR blocks of the current layer to the DC processing lanes:
// lane k receives block ap[col[k]], where col comes from the shift-factor
// table for count_layer_read. One C-to-1 multiplexer of Z x q~ bits per lane.
// Combinational.
module per_r #(
  parameter int Z   = ldpc_pkg::Z_DEF,
  parameter int QTB = ldpc_pkg::QT_BITS,
  localparam int C  = ldpc_pkg::C_COLS,
  localparam int DC = ldpc_pkg::DC,
  localparam int CW = $clog2(C)
) (
  input  logic [C-1:0][Z-1:0][QTB-1:0]  ap,
  input  logic [DC-1:0][CW-1:0]         col,
  output logic [DC-1:0][Z-1:0][QTB-1:0] lane
);
  always_comb begin
    for (int k = 0; k < DC; k++) begin
      lane[k] = '0;
      for (int j = 0; j < C; j++)
        if (int'(col[k]) == j) lane[k] = ap[j];
    end
  end
endmodule
