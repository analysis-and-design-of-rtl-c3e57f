// ldpc_decoder_top: layered NS-FAID / min-sum decoder for the (3,6)-regular
// QC-LDPC code (N = 1296), in either of its two architectures.
//
// ARCH = 0 builds the pipelined decoder (ldpc_decoder): one base-matrix row
// per layer, 12 layers, a register stage after the VNUs so two consecutive
// layers are in flight, 1 + 12 x N_ITER cycles per codeword. ARCH = 1 builds
// the full-layer decoder (ldpc_decoder_fl): four rows per layer, 3 layers, no
// pipeline stage, 3 x N_ITER cycles per codeword. Both implement the same
// decoding algorithm and give identical hard decisions; the full-layer one
// has four times the check-node hardware.
//
// Interface (both architectures): channel LLRs stream in one column of Z
// 4-bit values per in_valid/in_ready beat (24 beats per codeword); hard
// decisions stream out one column of Z bits per out_valid/out_ready beat,
// out_last on the 24th. cw_start pulses when a codeword starts decoding,
// cw_done when its result goes to the output buffer, stall while a finished
// result waits for the output buffer. en_decoder allows new codewords.
//
// The two architectures and their kernels (F_LUT) and CN-message formats
// (COMPRESSED) are those evaluated for this code; the pipelined one is the
// default here, a choice of this design. The stream interfaces are this
// design's own.
module ldpc_decoder_top #(
  parameter int ARCH       = 0,
  parameter int Z          = ldpc_pkg::Z_DEF,
  parameter int N_ITER     = 20,
  parameter ldpc_pkg::fra_lut_t F_LUT = ldpc_pkg::LUT_NSFAID3,
  parameter bit COMPRESSED = 1'b0
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   en_decoder,
  input  logic                                   in_valid,
  output logic                                   in_ready,
  input  logic [Z-1:0][ldpc_pkg::Q_BITS-1:0]     in_llr,
  output logic                                   out_valid,
  input  logic                                   out_ready,
  output logic [Z-1:0]                           out_bits,
  output logic                                   out_last,
  output logic                                   cw_start,
  output logic                                   cw_done,
  output logic                                   stall
);
  if (ARCH == 0) begin : g_pipe
    ldpc_decoder #(.Z(Z), .N_ITER(N_ITER), .F_LUT(F_LUT), .COMPRESSED(COMPRESSED)) u_dec (
      .clk, .rst_n, .en_decoder, .in_valid, .in_ready, .in_llr, .out_valid, .out_ready,
      .out_bits, .out_last, .cw_start, .cw_done, .stall);
  end else begin : g_full
    ldpc_decoder_fl #(.Z(Z), .N_ITER(N_ITER), .F_LUT(F_LUT), .COMPRESSED(COMPRESSED)) u_dec (
      .clk, .rst_n, .en_decoder, .in_valid, .in_ready, .in_llr, .out_valid, .out_ready,
      .out_bits, .out_last, .cw_start, .cw_done, .stall);
  end
endmodule
