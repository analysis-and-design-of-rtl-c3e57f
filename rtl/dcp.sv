// dcp: decompression (DCP) of compressed check-node messages.
//
// Expands each check node's word {signs, min1, min2, indx_min1} into the DC
// framed messages it sends: towards input k the sign is the xor of all signs
// except sign k, and the magnitude index is min2 when k = indx_min1 and min1
// otherwise. Combinational.
module dcp #(
  parameter int Z  = ldpc_pkg::Z_DEF,
  parameter int MW = 3,
  localparam int DC = ldpc_pkg::DC,
  localparam int IB = ldpc_pkg::IDX_BITS,
  localparam int CWD = DC + 2*(MW-1) + IB
) (
  input  logic [Z-1:0][CWD-1:0]        cmp,
  output logic [DC-1:0][Z-1:0][MW-1:0] msg
);
  always_comb begin
    for (int r = 0; r < Z; r++) begin
      logic [DC-1:0] sg;
      logic [MW-2:0] m1, m2;
      logic [IB-1:0] ix;
      {sg, m1, m2, ix} = cmp[r];
      for (int k = 0; k < DC; k++) begin
        msg[k][r] = {^sg ^ sg[k], (ix == IB'(k)) ? m2 : m1};
      end
    end
  end
endmodule
