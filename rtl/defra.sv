// defra: de-framing (DE-FRA) of one lane (Z in parallel).
//
// Converts a w-bit framed message (sign, index into the sorted image of F)
// back to its q-bit two's-complement value in Im(F), inverting the
// re-quantisation done by fra. With the identity table (min-sum kernel) it is
// a sign-magnitude to two's-complement conversion. Combinational.
module defra #(
  parameter int Z  = ldpc_pkg::Z_DEF,
  parameter int QB = ldpc_pkg::Q_BITS,
  parameter ldpc_pkg::fra_lut_t F_LUT = ldpc_pkg::LUT_NSFAID3,
  localparam int MW = ldpc_pkg::lut_bits(F_LUT),
  localparam int NI = (MW > 1) ? (1 << (MW-1)) : 1
) (
  input  logic [Z-1:0][MW-1:0] msg,
  output logic [Z-1:0][QB-1:0] beta
);
  logic [NI-1:0][QB-1:0] val_rom;
  for (genvar i = 0; i < NI; i++) begin : g_rom
    assign val_rom[i] = QB'(ldpc_pkg::defra_value(F_LUT, i));
  end

  always_comb begin
    for (int r = 0; r < Z; r++) begin
      logic [QB-1:0] v;
      if (MW > 1) v = val_rom[int'(msg[r]) % NI];
      else        v = val_rom[0];
      beta[r] = msg[r][MW-1] ? QB'(-$signed(v)) : v;
    end
  end
endmodule
