// input_buffer: serial-in parallel-out buffer for the channel LLRs.
//
// The channel delivers one base-matrix column (Z LLRs of Q_BITS bits, natural
// order) per accepted beat (in_valid && in_ready). Beats shift through a chain
// of C registers, so after C beats column j sits in llr[j] and full rises.
// The decoder copies the whole word in one cycle by pulsing take, which
// empties the buffer; the next codeword can then be loaded while the current
// one is decoded. in_ready is low while the buffer is full. Loading one column
// per beat is this design's choice; the buffer being a bank of SIPO shift
// registers follows the architecture description.
module input_buffer #(
  parameter int Z = ldpc_pkg::Z_DEF,
  parameter int C = ldpc_pkg::C_COLS,
  parameter int QB = ldpc_pkg::Q_BITS
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic [Z-1:0][QB-1:0]        in_llr,
  input  logic                        take,
  output logic                        full,
  output logic [C-1:0][Z-1:0][QB-1:0] llr
);
  logic [$clog2(C+1)-1:0] count;

  assign in_ready = !full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      full  <= 1'b0;
      llr   <= '0;
    end else if (take) begin
      count <= '0;
      full  <= 1'b0;
    end else if (in_valid && in_ready) begin
      for (int j = 0; j < C-1; j++) llr[j] <= llr[j+1];
      llr[C-1] <= in_llr;
      if (int'(count) == C-1) begin
        full  <= 1'b1;
        count <= '0;
      end else begin
        count <= count + 1'b1;
      end
    end
  end
endmodule
