// apllr: AP-LLR update units of one lane (Z in parallel).
//
// gamma~ = alpha + beta_new, with alpha the q~-bit VN message from the
// pipeline register and beta_new the q-bit CN message just computed for the
// same edge. The sum is saturated to [-Q~, +Q~] (the saturation is this
// design's choice). Combinational.
module apllr #(
  parameter int Z   = ldpc_pkg::Z_DEF,
  parameter int QB  = ldpc_pkg::Q_BITS,
  parameter int QTB = ldpc_pkg::QT_BITS
) (
  input  logic [Z-1:0][QTB-1:0] alpha,
  input  logic [Z-1:0][QB-1:0]  beta,
  output logic [Z-1:0][QTB-1:0] ap
);
  localparam int QTM = (1 << (QTB-1)) - 1;
  always_comb begin
    for (int r = 0; r < Z; r++) begin
      logic signed [QTB:0] s;
      s = $signed({alpha[r][QTB-1], alpha[r]}) + $signed(QTB'($signed(beta[r])));
      if (int'(s) > QTM)       ap[r] = QTB'(QTM);
      else if (int'(s) < -QTM) ap[r] = QTB'(-QTM);
      else               ap[r] = s[QTB-1:0];
    end
  end
endmodule
