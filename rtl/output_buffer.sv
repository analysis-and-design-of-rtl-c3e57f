// output_buffer: parallel-in serial-out buffer for the decoded hard bits.
//
// capture loads the whole codeword (C columns of Z bits, natural order) in one
// cycle; it must only be pulsed while busy is low. The buffer then offers one
// column per beat on out_bits with out_valid, column 0 first, and advances
// when out_ready is high; out_last marks column C-1. busy stays high until the
// last column has been accepted, and the decoder holds a finished codeword
// until then. Offloading one column per beat is this design's choice.
module output_buffer #(
  parameter int Z = ldpc_pkg::Z_DEF,
  parameter int C = ldpc_pkg::C_COLS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 capture,
  input  logic [C-1:0][Z-1:0]  bits,
  output logic                 busy,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [Z-1:0]         out_bits,
  output logic                 out_last
);
  logic [C-1:0][Z-1:0]    sreg;
  logic [$clog2(C+1)-1:0] left;

  assign busy      = (left != 0);
  assign out_valid = busy;
  assign out_bits  = sreg[0];
  assign out_last  = (left == 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sreg <= '0;
      left <= '0;
    end else if (capture && !busy) begin
      sreg <= bits;
      left <= ($clog2(C+1))'(C);
    end else if (out_valid && out_ready) begin
      for (int j = 0; j < C-1; j++) sreg[j] <= sreg[j+1];
      sreg[C-1] <= '0;
      left <= left - 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n) assert (!(capture && busy)) else $error("output_buffer: capture while busy");
  end
endmodule
