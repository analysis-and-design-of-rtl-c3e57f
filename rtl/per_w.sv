// per_w: write permutation (PER_W), the inverse of PER_R.
//
// Lane k of the updated AP-LLRs is steered back to block col[k] of the AP-LLR
// memory and that block's write enable is raised, gated by write_en. Blocks
// not used by the layer keep wr_en low. The lanes of a layer address distinct
// columns (checked by a clocked assertion in ldpc_decoder, after reset).
// Combinational.
module per_w #(
  parameter int Z   = ldpc_pkg::Z_DEF,
  parameter int QTB = ldpc_pkg::QT_BITS,
  localparam int C  = ldpc_pkg::C_COLS,
  localparam int DC = ldpc_pkg::DC,
  localparam int CW = $clog2(C)
) (
  input  logic                          write_en,
  input  logic [DC-1:0][Z-1:0][QTB-1:0] lane,
  input  logic [DC-1:0][CW-1:0]         col,
  output logic [C-1:0][Z-1:0][QTB-1:0]  wr_data,
  output logic [C-1:0]                  wr_en
);
  always_comb begin
    wr_data = '0;
    wr_en   = '0;
    for (int j = 0; j < C; j++)
      for (int k = 0; k < DC; k++)
        if (int'(col[k]) == j) begin
          wr_data[j] = lane[k];
          wr_en[j]   = write_en;
        end
  end
endmodule
