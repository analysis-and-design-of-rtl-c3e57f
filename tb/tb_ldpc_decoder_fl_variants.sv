// tb_ldpc_decoder_fl_variants: the other five decoder variants evaluated for
// the (3,6)-regular code in the full-layer architecture, with the expansion
// factor reduced to z = 18 (shifts taken mod 18) to keep the five-decoder
// build short, and 20 iterations: min-sum MS(4,6) uncompressed and
// compressed, NS-FAID-3 compressed, NS-FAID-2 uncompressed and compressed.
// All five decode the same three codewords (noisy all-zero words at two noise
// levels and one word of random LLRs); each result is compared bit for bit
// with the behavioural reference for its framing function, the low-noise word
// must decode to all-zero, and the start-to-result latency must be 3 x 20
// cycles (four rows per layer, no pipeline stage).
module tb_ldpc_decoder_fl_variants;
  import ldpc_pkg::*;
  import ldpc_ref_pkg::*;

  localparam int Z = 18;
  localparam int N = C_COLS * Z;
  localparam int NCW = 3;
  localparam int NIT = 20;
  localparam int NV = 5;
  localparam fra_lut_t VLUT [NV] = '{LUT_MS, LUT_MS, LUT_NSFAID3, LUT_NSFAID2, LUT_NSFAID2};
  localparam bit       VCMP [NV] = '{1'b0, 1'b1, 1'b1, 1'b0, 1'b1};

  logic clk = 0, rst_n = 1;
  logic in_valid;
  logic [Z-1:0][Q_BITS-1:0] in_llr;
  logic [NV-1:0] in_ready, out_valid, out_last, cw_start, cw_done, stall;
  logic [NV-1:0][Z-1:0] out_bits;

  always #5 clk = ~clk;

  for (genvar v = 0; v < NV; v++) begin : g_dut
    ldpc_decoder_fl #(.Z(Z), .N_ITER(NIT), .F_LUT(VLUT[v]), .COMPRESSED(VCMP[v])) dut (
      .clk, .rst_n, .en_decoder(1'b1), .in_valid, .in_ready(in_ready[v]), .in_llr,
      .out_valid(out_valid[v]), .out_ready(1'b1), .out_bits(out_bits[v]), .out_last(out_last[v]),
      .cw_start(cw_start[v]), .cw_done(cw_done[v]), .stall(stall[v]));
  end

  int checks = 0, failures = 0;
  int llr [NCW][NMAX];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < NCW; c++)
      for (int n = 0; n < NMAX; n++)
        llr[c][n] = (n >= N) ? 0 : (c == 2) ? $signed($urandom_range(14, 0)) - 7
                                            : chan_llr(1'b0, (c == 0) ? 0.55 : 0.8, 3.0);
  end

  int in_cw = 0, in_col = 0;
  always @(posedge clk) begin
    if (rst_n && in_valid && in_ready[0]) begin
      if (in_col == C_COLS-1) begin in_col <= 0; in_cw <= in_cw + 1; end
      else in_col <= in_col + 1;
    end
  end
  always_comb begin
    in_valid = rst_n && (in_cw < NCW);
    for (int e = 0; e < Z; e++) in_llr[e] = Q_BITS'(llr[(in_cw < NCW) ? in_cw : 0][in_col*Z + e]);
  end

  int out_cw [NV], out_col [NV], st [NV];
  bit got [NV][NCW][NMAX];
  initial for (int v = 0; v < NV; v++) begin out_cw[v] = 0; out_col[v] = 0; end
  always @(posedge clk) if (rst_n) begin
    for (int v = 0; v < NV; v++) begin
      if (in_ready[v] != in_ready[0]) begin checks++; failures++; end
      if (cw_done[v]) begin
        checks++;
        if (cyc - st[v] != (N_LAYERS/RPL_FULL)*NIT) begin failures++; $display("variant %0d latency %0d", v, cyc - st[v]); end
      end
      if (cw_start[v]) st[v] = cyc;   // after the check: a start may share the cycle of a result
      if (out_valid[v]) begin
        for (int e = 0; e < Z; e++) got[v][out_cw[v]][out_col[v]*Z + e] = out_bits[v][e];
        if (out_col[v] == C_COLS-1) begin out_col[v] = 0; out_cw[v]++; end
        else out_col[v]++;
      end
    end
  end

  initial begin
    #1 rst_n = 0;   // falling edge applies the asynchronous reset at once
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (out_cw[NV-1] == NCW && out_cw[0] == NCW);
    repeat (2) @(posedge clk);
    for (int v = 0; v < NV; v++)
      for (int c = 0; c < NCW; c++) begin
        bit hard [NMAX];
        int diff, nerr;
        decode(VLUT[v], Z, NIT, llr[c], hard);
        diff = 0; nerr = 0;
        for (int n = 0; n < N; n++) begin
          if (hard[n] != got[v][c][n]) diff++;
          if (got[v][c][n]) nerr++;
        end
        checks++;
        if (diff != 0) begin failures++; $display("variant %0d codeword %0d: %0d bits differ", v, c, diff); end
        if (c == 0) begin checks++; if (nerr != 0) begin failures++; $display("variant %0d: %0d residual errors", v, nerr); end end
        $display("variant %0d (compressed=%0d) codeword %0d: %0d bits set, %0d differ from reference", v, VCMP[v], c, nerr, diff);
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
