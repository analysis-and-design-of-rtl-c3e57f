// alpha_mem: VN-message memory of the full-layer decoder, with its input data
// selector (DS).
//
// In the full-layer architecture the a-posteriori LLRs are not stored; only
// the q~-bit VN messages alpha of the layer about to be processed are kept,
// one Z-element block per slot. Slot s = 6 r + k holds the messages of edge
// k of row r of the current full layer, already permuted and rotated for
// that layer. With data_sel = 0 the DS takes the initial values from
// PER_1/BS_1 (first layer of a new codeword, beta = 0); with data_sel = 1 it
// takes the VN messages computed by the VNUs for the next layer. All slots
// are written together when we is high and read combinationally.
//
// Timing: one write per cycle, the new content visible the cycle after.
// The memory is the same size as the AP-LLR memory of the pipelined
// decoder, as its description says; building it from registers (so every
// slot is read and written in the same cycle) and the asynchronous reset are
// this design's choices.
module alpha_mem #(
  parameter int Z   = ldpc_pkg::Z_DEF,
  parameter int S   = ldpc_pkg::C_COLS,
  parameter int QTB = ldpc_pkg::QT_BITS
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         data_sel,
  input  logic                         we,
  input  logic [S-1:0][Z-1:0][QTB-1:0] init_data,
  input  logic [S-1:0][Z-1:0][QTB-1:0] vnu_data,
  output logic [S-1:0][Z-1:0][QTB-1:0] alpha
);
  logic [S-1:0][Z-1:0][QTB-1:0] ds;

  assign ds = data_sel ? vnu_data : init_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  alpha <= '0;
    else if (we) alpha <= ds;
  end
endmodule
