// beta_mem: check-node message memory (beta memory).
//
// Simple dual-port synchronous RAM with one word per decoding layer; a word
// holds the Z check-node messages of the layer, compressed or uncompressed.
// Port A writes wdata to waddr when we is high. Port B registers the word at
// raddr when re is high, so data appears one cycle after the address: the
// controller presents the address of the next layer while the current one is
// read. Reading and writing the same address in one cycle returns the old
// word (read-before-write); the decoder never does so. Memory content is not
// reset.
module beta_mem #(
  parameter int DEPTH = ldpc_pkg::N_LAYERS,
  parameter int WIDTH = 972,
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end
endmodule
