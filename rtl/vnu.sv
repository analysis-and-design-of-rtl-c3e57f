// vnu: variable-node units of one lane (Z in parallel).
//
// Each unit computes the VN message alpha = gamma~ - beta with a q~-bit
// subtractor, where gamma~ is the q~-bit AP-LLR and beta the q-bit CN message
// the same check node sent in the previous iteration. The difference is
// saturated to [-Q~, +Q~] (this saturation is this design's choice; the
// architecture only specifies a q~-bit subtractor). Combinational.
module vnu #(
  parameter int Z   = ldpc_pkg::Z_DEF,
  parameter int QB  = ldpc_pkg::Q_BITS,
  parameter int QTB = ldpc_pkg::QT_BITS
) (
  input  logic [Z-1:0][QTB-1:0] ap,
  input  logic [Z-1:0][QB-1:0]  beta,
  output logic [Z-1:0][QTB-1:0] alpha
);
  localparam int QTM = (1 << (QTB-1)) - 1;
  always_comb begin
    for (int r = 0; r < Z; r++) begin
      logic signed [QTB:0] d;
      d = $signed({ap[r][QTB-1], ap[r]}) - $signed(QTB'($signed(beta[r])));
      if (int'(d) > QTM)       alpha[r] = QTB'(QTM);
      else if (int'(d) < -QTM) alpha[r] = QTB'(-QTM);
      else               alpha[r] = d[QTB-1:0];
    end
  end
endmodule
