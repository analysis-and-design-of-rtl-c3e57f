// ldpc_decoder: pipelined layered decoder for the (3,6)-regular QC-LDPC code
// (12 x 24 base matrix, z = 54, N = 1296), with min-sum or NS-FAID kernel.
//
// Data path of one layer (one base-matrix row, Z = z check nodes):
//   P1: AP-LLR memory -> PER_R (pick the DC columns of the row) -> BS_R
//       (rotate each block to the row's alignment) -> VNU (alpha = gamma~ -
//       beta_old, beta_old read from the beta memory, DCP and DE-FRA) ->
//       pipeline registers.
//   P2: SAT/FRA (saturate, frame, re-quantise to w bits) -> CNU -> beta
//       memory write, and in parallel DCP -> DE-FRA -> AP-LLR unit
//       (gamma~ = alpha + beta_new) -> PER_W -> AP-LLR memory write.
// P1 of layer l+1 overlaps P2 of layer l; the code's consecutive rows share no
// column, so there is no memory conflict. The AP-LLR memory keeps every column
// rotated as the last layer that used it left it, so the write-back needs no
// shifter; BS_INIT pre-rotates the input and BS_INIT-bar un-rotates the hard
// decision.
//
// Interface: the channel LLRs arrive one column (z q-bit LLRs) per
// in_valid/in_ready beat, 24 beats per codeword; the hard decision leaves one
// column (z bits) per out_valid/out_ready beat, out_last on the 24th. A
// codeword takes 1 + 12 x N_ITER cycles, and codewords are decoded
// back-to-back while input keeps up, loading and offloading overlapping the
// decoding.
//
// Parameters: F_LUT selects the kernel (ldpc_pkg::LUT_MS for min-sum,
// LUT_NSFAID3 or LUT_NSFAID2 for the NS-FAIDs with w = 3 and w = 2 bits);
// COMPRESSED stores CN messages as {signs, min1, min2, indx_min1} instead of
// one message per edge. The default, NS-FAID with w = 3, uncompressed, 20
// iterations, is one of the evaluated configurations. Z may be lowered for
// experiments (shifts are then taken mod Z). Saturation of the q~-bit sums,
// forcing beta to 0 in the first iteration, and the stream interfaces are
// this design's choices.
module ldpc_decoder #(
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
  import ldpc_pkg::*;

  localparam int C   = C_COLS;
  localparam int L   = N_LAYERS;
  localparam int LW  = $clog2(L);
  localparam int CW  = $clog2(C);
  localparam int SW  = (Z > 1) ? $clog2(Z) : 1;
  localparam int MW  = lut_bits(F_LUT);
  localparam int CMPW = DC + 2*(MW-1) + IDX_BITS;
  localparam int BW  = COMPRESSED ? Z*CMPW : Z*DC*MW;

  // ---------------- control
  logic          init, data_sel, p1_valid, first_iter, en_mem, write_en, capture;
  logic [LW-1:0] layer_rd, layer_wr, beta_raddr;
  logic          in_full, out_busy;

  controller #(.N_ITER(N_ITER)) u_ctrl (
    .clk, .rst_n, .en_decoder, .in_full, .out_busy,
    .init, .data_sel, .p1_valid, .count_layer_read(layer_rd), .first_iter,
    .en_mem, .beta_raddr, .write_en, .count_layer_write(layer_wr), .capture, .stall);

  assign cw_start = init;
  assign cw_done  = capture;

  // ---------------- input side
  logic [C-1:0][Z-1:0][Q_BITS-1:0]  in_word;
  logic [C-1:0][Z-1:0][QT_BITS-1:0] init_ap;

  input_buffer #(.Z(Z)) u_inbuf (
    .clk, .rst_n, .in_valid, .in_ready, .in_llr, .take(init), .full(in_full), .llr(in_word));

  bs_init #(.Z(Z)) u_bs_init (.llr(in_word), .ap(init_ap));

  // ---------------- AP-LLR memory
  logic [C-1:0][Z-1:0][QT_BITS-1:0] ap, ap_wb, wr_data;
  logic [C-1:0]                     wr_en;

  gamma_mem #(.Z(Z)) u_gmem (
    .clk, .rst_n, .data_sel, .init_we(init), .init_data(init_ap),
    .wr_en, .wr_data, .ap, .ap_wb);

  // ---------------- P1
  logic [DC-1:0][CW-1:0]            col_rd, col_wr;
  logic [DC-1:0][SW-1:0]            sh_rd, sh_wr_unused;
  logic [DC-1:0][Z-1:0][QT_BITS-1:0] lane_ap, lane_al;
  logic [DC-1:0][Z-1:0][MW-1:0]     old_msg;
  logic [DC-1:0][Z-1:0][Q_BITS-1:0] old_beta, old_beta_m;
  logic [BW-1:0]                    beta_rdata, beta_wdata;

  shift_factor #(.Z(Z)) u_sf_rd (.layer(layer_rd), .col(col_rd), .shift(sh_rd));
  per_r #(.Z(Z)) u_per_r (.ap, .col(col_rd), .lane(lane_ap));
  bs_r  #(.Z(Z)) u_bs_r  (.din(lane_ap), .shift(sh_rd), .dout(lane_al));

  beta_mem #(.DEPTH(L), .WIDTH(BW)) u_bmem (
    .clk, .we(write_en), .waddr(layer_wr), .wdata(beta_wdata),
    .re(en_mem), .raddr(beta_raddr), .rdata(beta_rdata));

  if (COMPRESSED) begin : g_rd_cmp
    dcp #(.Z(Z), .MW(MW)) u_dcp_rd (.cmp(beta_rdata), .msg(old_msg));
  end else begin : g_rd_unc
    assign old_msg = beta_rdata;
  end

  // p2 pipeline registers
  logic [DC-1:0][Z-1:0][QT_BITS-1:0] alpha, alpha_q;

  for (genvar k = 0; k < DC; k++) begin : g_p1
    defra #(.Z(Z), .F_LUT(F_LUT)) u_defra_rd (.msg(old_msg[k]), .beta(old_beta[k]));
    assign old_beta_m[k] = first_iter ? '0 : old_beta[k];
    vnu #(.Z(Z)) u_vnu (.ap(lane_al[k]), .beta(old_beta_m[k]), .alpha(alpha[k]));
  end

  // ---------------- pipeline registers (end of P1)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        alpha_q <= '0;
    else if (p1_valid) alpha_q <= alpha;
  end

  // ---------------- P2
  logic [DC-1:0][Z-1:0][MW-1:0]      new_msg_in, new_msg_out;
  logic [Z-1:0][CMPW-1:0]            cmp;
  logic [DC-1:0][Z-1:0][Q_BITS-1:0]  new_beta;
  logic [DC-1:0][Z-1:0][QT_BITS-1:0] lane_new;

  for (genvar k = 0; k < DC; k++) begin : g_fra
    fra #(.Z(Z), .F_LUT(F_LUT)) u_fra (.alpha(alpha_q[k]), .msg(new_msg_in[k]));
  end

  cnu #(.Z(Z), .MW(MW)) u_cnu (.msg(new_msg_in), .cmp);
  dcp #(.Z(Z), .MW(MW)) u_dcp_wr (.cmp, .msg(new_msg_out));

  if (COMPRESSED) begin : g_wr_cmp
    assign beta_wdata = cmp;
  end else begin : g_wr_unc
    assign beta_wdata = new_msg_out;
  end

  for (genvar k = 0; k < DC; k++) begin : g_p2
    defra #(.Z(Z), .F_LUT(F_LUT)) u_defra_wr (.msg(new_msg_out[k]), .beta(new_beta[k]));
    apllr #(.Z(Z)) u_apllr (.alpha(alpha_q[k]), .beta(new_beta[k]), .ap(lane_new[k]));
  end

  shift_factor #(.Z(Z)) u_sf_wr (.layer(layer_wr), .col(col_wr), .shift(sh_wr_unused));
  per_w #(.Z(Z)) u_per_w (.write_en, .lane(lane_new), .col(col_wr), .wr_data, .wr_en);

  // the lanes of one layer must write distinct AP-LLR blocks
  always_ff @(posedge clk) begin
    if (rst_n && write_en)
      for (int a = 0; a < DC; a++)
        for (int b = a + 1; b < DC; b++)
          assert (col_wr[a] != col_wr[b]) else $error("ldpc_decoder: two lanes write column %0d", col_wr[a]);
  end

  // ---------------- hard decision and output
  logic [C-1:0][Z-1:0] hard;
  bs_init_inv #(.Z(Z)) u_bs_inv (.ap(ap_wb), .bits(hard));

  output_buffer #(.Z(Z)) u_outbuf (
    .clk, .rst_n, .capture, .bits(hard), .busy(out_busy),
    .out_valid, .out_ready, .out_bits, .out_last);

endmodule
