// fra: saturation and framing (SAT/FRA) of one lane (Z in parallel).
//
// A q~-bit VN message x is saturated to [-Q, +Q] (Q = 7), the framing
// function F is applied to |x| through the table F_LUT, and the result is
// re-quantised as (sign, index of F(|x|) in the sorted image of F) on
// MW = w bits. x = 0 gives a positive sign, so F(0) = +/-lambda is always sent
// as +lambda. With the identity table (min-sum kernel) the index equals the
// saturated magnitude and the block reduces to the SAT saturator.
// Combinational.
module fra #(
  parameter int Z   = ldpc_pkg::Z_DEF,
  parameter int QTB = ldpc_pkg::QT_BITS,
  parameter ldpc_pkg::fra_lut_t F_LUT = ldpc_pkg::LUT_NSFAID3,
  localparam int MW = ldpc_pkg::lut_bits(F_LUT),
  localparam int QM = ldpc_pkg::QMAX
) (
  input  logic [Z-1:0][QTB-1:0] alpha,
  output logic [Z-1:0][MW-1:0]  msg
);
  // magnitude -> index table, computed at elaboration
  logic [QM:0][MW-1:0] idx_rom;
  for (genvar m = 0; m <= QM; m++) begin : g_rom
    if (MW > 1) begin : g_idx
      assign idx_rom[m] = MW'(ldpc_pkg::fra_index(F_LUT, m));
    end else begin : g_noidx
      assign idx_rom[m] = '0;
    end
  end

  always_comb begin
    for (int r = 0; r < Z; r++) begin
      logic [QTB-1:0] mag;
      logic           neg;
      int             ms;
      neg = alpha[r][QTB-1];
      mag = neg ? QTB'(-$signed(alpha[r])) : alpha[r];
      ms  = (int'(mag) > QM) ? QM : int'(mag);
      msg[r] = idx_rom[ms];
      msg[r][MW-1] = neg;
    end
  end
endmodule
