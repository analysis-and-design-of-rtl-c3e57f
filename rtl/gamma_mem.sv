// gamma_mem: AP-LLR memory (gamma~ memory) with its input data selector (DS).
//
// C register blocks AP_1..AP_C of Z x q~ bits, one per base-matrix column, so
// that any set of blocks can be read and written in the same cycle. With
// data_sel = 0 the DS selects the initial values from BS_INIT and init_we
// loads every block at once; with data_sel = 1 the blocks whose wr_en bit is
// set take the updated AP-LLRs coming back through PER_W. All blocks are read
// combinationally on ap. ap_wb is the memory content with the pending
// write-back applied (the value the blocks would hold after a data_sel = 1
// write); the hard decision is taken from it so that the last layer's update
// and the next codeword's initial load can share a cycle.
module gamma_mem #(
  parameter int Z   = ldpc_pkg::Z_DEF,
  parameter int C   = ldpc_pkg::C_COLS,
  parameter int QTB = ldpc_pkg::QT_BITS
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         data_sel,
  input  logic                         init_we,
  input  logic [C-1:0][Z-1:0][QTB-1:0] init_data,
  input  logic [C-1:0]                 wr_en,
  input  logic [C-1:0][Z-1:0][QTB-1:0] wr_data,
  output logic [C-1:0][Z-1:0][QTB-1:0] ap,
  output logic [C-1:0][Z-1:0][QTB-1:0] ap_wb
);
  always_comb begin
    for (int j = 0; j < C; j++) ap_wb[j] = wr_en[j] ? wr_data[j] : ap[j];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ap <= '0;
    end else begin
      for (int j = 0; j < C; j++) begin
        if (!data_sel) begin
          if (init_we) ap[j] <= init_data[j];
        end else if (wr_en[j]) begin
          ap[j] <= wr_data[j];
        end
      end
    end
  end
endmodule
