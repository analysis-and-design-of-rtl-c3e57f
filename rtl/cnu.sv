// cnu: check-node units for one layer (Z check nodes in parallel, DC inputs each).
//
// Implements the min-sum check-node rule on framed messages. Because framing
// re-quantises Im(F) in increasing order, comparing indices is the same as
// comparing the magnitudes they stand for. For each check node the unit finds
// the smallest magnitude index (min1), its input position (indx_min1), the
// second smallest (min2), and keeps the DC input signs, and emits them as one
// compressed word {signs, min1, min2, indx_min1} of
// DC + 2(MW-1) + ceil(log2 DC) bits. The message towards input k is then
// sign = xor of the other signs, magnitude = min2 if k = indx_min1 else min1
// (see dcp). Ties keep the lowest position as indx_min1. The min search is a
// linear scan, the simplest structure with this function; the architecture
// uses a tree-structured search of the same function. Combinational.
module cnu #(
  parameter int Z  = ldpc_pkg::Z_DEF,
  parameter int MW = 3,
  localparam int DC = ldpc_pkg::DC,
  localparam int IB = ldpc_pkg::IDX_BITS,
  localparam int CWD = DC + 2*(MW-1) + IB
) (
  input  logic [DC-1:0][Z-1:0][MW-1:0] msg,
  output logic [Z-1:0][CWD-1:0]        cmp
);
  always_comb begin
    for (int r = 0; r < Z; r++) begin
      logic [DC-1:0] sg;
      logic [MW-2:0] m1, m2, mg;
      logic [IB-1:0] ix;
      m1 = '1;
      m2 = '1;
      ix = '0;
      for (int k = 0; k < DC; k++) begin
        sg[k] = msg[k][r][MW-1];
        mg    = msg[k][r][MW-2:0];
        if (mg < m1) begin
          m2 = m1;
          m1 = mg;
          ix = IB'(k);
        end else if (mg < m2) begin
          m2 = mg;
        end
      end
      cmp[r] = {sg, m1, m2, ix};
    end
  end
endmodule
