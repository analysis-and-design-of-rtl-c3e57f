// ldpc_decoder_fl: full-layer layered decoder for the (3,6)-regular QC-LDPC
// code (12 x 24 base matrix, z = 54, N = 1296), min-sum or NS-FAID kernel.
//
// The base matrix is split into L = 3 full layers of RPL = 4 consecutive
// rows; each column has exactly one entry per full layer, so 4 x Z CNUs and
// 24 x Z VNUs work in parallel and a layer takes one cycle, with no pipeline
// register. Only the VN messages alpha of the layer about to be processed are
// stored (alpha memory), already permuted and rotated for that layer. In the
// cycle of layer l:
//   alpha memory -> SAT/FRA -> CNU -> beta memory (word of layer l)
//                                 \-> DCP -> DE-FRA -> AP-LLR (gamma~ =
//   alpha + beta_new) -> PER_WR/BS_WR (to the order of layer l+1) -> VNU
//   (alpha = gamma~ - beta of layer l+1 from the previous iteration) -> DS ->
//   alpha memory.
// The beta word of layer l+1 is read from the synchronous beta RAM one cycle
// ahead (address l+2 while layer l runs), so read and write addresses never
// coincide and no asynchronous RAM is needed. In the first iteration the
// VNUs use beta = 0 for layers not yet written. A new codeword enters through
// PER_1/BS_1 and the DS; after the last layer of the last iteration the signs
// of the AP-LLRs leave through PER_L/BS_L (inverse) to the output buffer.
//
// Interface and handshakes are those of ldpc_decoder: one column per beat in
// and out, cw_start, cw_done and stall. A codeword takes L x N_ITER = 60
// cycles after a one-cycle load that overlaps the previous codeword's last
// layer, so back-to-back codewords start every 60 cycles (delta = 0 in the
// throughput formula). If the output buffer is still busy when a codeword
// finishes, its last layer is held (stall) until the buffer is free.
//
// The organisation (alpha memory, the three PER/BS networks, beta read one
// layer ahead from a synchronous RAM) follows the full-layer architecture's
// description; the slot order, the one-cycle-ahead read, beta = 0 in the
// first iteration, saturation and the stream interfaces are this design's
// choices. Parameters as in ldpc_decoder.
module ldpc_decoder_fl #(
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

  localparam int C    = C_COLS;
  localparam int RPL  = RPL_FULL;
  localparam int LF   = N_LAYERS / RPL;
  localparam int LW   = $clog2(LF);
  localparam int IW   = (N_ITER > 1) ? $clog2(N_ITER) : 1;
  localparam int ZR   = RPL * Z;
  localparam int MW   = lut_bits(F_LUT);
  localparam int CMPW = DC + 2*(MW-1) + IDX_BITS;
  localparam int BW   = COMPRESSED ? ZR*CMPW : ZR*DC*MW;

  // ---------------- control
  logic          busy, last, init, capture, advance, zero_beta, in_full, out_busy;
  logic [LW-1:0] layer, beta_raddr;
  logic [IW-1:0] iter;

  assign last      = busy && (layer == LW'(LF-1)) && (iter == IW'(N_ITER-1));
  assign capture   = last && !out_busy;
  assign stall     = last && out_busy;
  assign advance   = busy && !stall;
  assign init      = en_decoder && in_full && (!busy || capture);
  assign zero_beta = (iter == '0) && (layer != LW'(LF-1));
  assign beta_raddr = init ? LW'(1 % LF) : LW'((int'(layer) + 2) % LF);
  assign cw_start  = init;
  assign cw_done   = capture;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      layer <= '0;
      iter  <= '0;
    end else if (init) begin
      busy  <= 1'b1;
      layer <= '0;
      iter  <= '0;
    end else if (capture) begin
      busy  <= 1'b0;
    end else if (advance) begin
      if (layer == LW'(LF-1)) begin
        layer <= '0;
        iter  <= iter + 1'b1;
      end else begin
        layer <= layer + 1'b1;
      end
    end
  end

  // ---------------- input side and networks
  logic [C-1:0][Z-1:0][Q_BITS-1:0]  in_word;
  logic [C-1:0][Z-1:0][QT_BITS-1:0] first, alpha, ap, nxt, alpha_new;
  logic [C-1:0][Z-1:0]              hard;

  input_buffer #(.Z(Z)) u_inbuf (
    .clk, .rst_n, .in_valid, .in_ready, .in_llr, .take(init), .full(in_full), .llr(in_word));

  fl_shift_net #(.Z(Z)) u_net (
    .llr(in_word), .first, .layer, .ap, .next(nxt), .bits(hard));

  alpha_mem #(.Z(Z)) u_amem (
    .clk, .rst_n, .data_sel(!init), .we(init || advance),
    .init_data(first), .vnu_data(alpha_new), .alpha);

  // ---------------- check-node side: SAT/FRA -> CNU -> DCP -> DE-FRA -> AP-LLR
  logic [DC-1:0][ZR-1:0][MW-1:0] cnu_in, new_msg, old_msg;
  logic [ZR-1:0][CMPW-1:0]       cmp;
  logic [BW-1:0]                 beta_wdata, beta_rdata;

  for (genvar s = 0; s < C; s++) begin : g_fra
    fra #(.Z(Z), .F_LUT(F_LUT)) u_fra (.alpha(alpha[s]), .msg(cnu_in[s % DC][(s / DC)*Z +: Z]));
  end

  cnu #(.Z(ZR), .MW(MW)) u_cnu (.msg(cnu_in), .cmp);
  dcp #(.Z(ZR), .MW(MW)) u_dcp_wr (.cmp, .msg(new_msg));

  if (COMPRESSED) begin : g_cmp
    assign beta_wdata = cmp;
    dcp #(.Z(ZR), .MW(MW)) u_dcp_rd (.cmp(beta_rdata), .msg(old_msg));
  end else begin : g_unc
    assign beta_wdata = new_msg;
    assign old_msg    = beta_rdata;
  end

  beta_mem #(.DEPTH(LF), .WIDTH(BW)) u_bmem (
    .clk, .we(advance), .waddr(layer), .wdata(beta_wdata),
    .re(init || advance), .raddr(beta_raddr), .rdata(beta_rdata));

  for (genvar s = 0; s < C; s++) begin : g_slot
    logic [Z-1:0][Q_BITS-1:0] nb, ob, ob_m;
    defra #(.Z(Z), .F_LUT(F_LUT)) u_defra_wr (.msg(new_msg[s % DC][(s / DC)*Z +: Z]), .beta(nb));
    apllr #(.Z(Z)) u_apllr (.alpha(alpha[s]), .beta(nb), .ap(ap[s]));
    defra #(.Z(Z), .F_LUT(F_LUT)) u_defra_rd (.msg(old_msg[s % DC][(s / DC)*Z +: Z]), .beta(ob));
    assign ob_m = zero_beta ? '0 : ob;
    vnu #(.Z(Z)) u_vnu (.ap(nxt[s]), .beta(ob_m), .alpha(alpha_new[s]));
  end

  // ---------------- output
  output_buffer #(.Z(Z)) u_outbuf (
    .clk, .rst_n, .capture, .bits(hard), .busy(out_busy),
    .out_valid, .out_ready, .out_bits, .out_last);

endmodule
