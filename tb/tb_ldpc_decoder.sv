// tb_ldpc_decoder: end-to-end test of the decoder top at its default
// configuration: pipelined architecture, z = 54, N = 1296, NS-FAID w = 3,
// uncompressed, 20 iterations.
//
// Six codewords are streamed in: noisy all-zero codewords at two noise levels,
// a word of uniformly random LLRs, and noisy words received while the output
// side is held off. Each decoded word is compared bit for bit with the
// behavioural reference in ldpc_ref_pkg; noisy words at the low noise level
// must also decode to the all-zero codeword. The test measures the cycles from
// codeword start to result (1 + 12 x 20 = 241 expected, the throughput
// formula's delta + L x n_iter) and the start-to-start period of back-to-back
// codewords, and counts how often each mechanism occurred: initial load,
// P1/P2 overlap, first-iteration beta bypass, beta memory reuse, loading
// during decoding, back-to-back start, idling for input, and output stall.
module tb_ldpc_decoder;
  import ldpc_pkg::*;
  import ldpc_ref_pkg::*;

  localparam int Z = Z_DEF;
  localparam int N = C_COLS * Z;
  localparam int NCW = 6;
  localparam int NIT = 20;

  logic clk = 0, rst_n = 1;
  logic en_decoder, in_valid, in_ready, out_valid, out_ready, out_last;
  logic [Z-1:0][Q_BITS-1:0] in_llr;
  logic [Z-1:0] out_bits;
  logic cw_start, cw_done, stall;

  ldpc_decoder_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int llr [NCW][NMAX];
  bit expect_zero [NCW];
  int cyc = 0;

  // watchdog
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;

  // stimulus generation
  initial begin
    for (int c = 0; c < NCW; c++) begin
      real sigma;
      sigma = (c % 2 == 0) ? 0.55 : 0.80;
      expect_zero[c] = (c % 2 == 0) && c != 2;
      for (int n = 0; n < NMAX; n++)
        llr[c][n] = (n < N) ? ((c == 2) ? $signed($urandom_range(14, 0)) - 7 : chan_llr(1'b0, sigma, 3.8)) : 0;
    end
  end

  // input driver: column j of codeword c on beat j; a pause before codeword 4
  int in_cw = 0, in_col = 0;
  always @(posedge clk) begin
    if (rst_n && in_valid && in_ready) begin
      if (in_col == C_COLS-1) begin in_col <= 0; in_cw <= in_cw + 1; end
      else in_col <= in_col + 1;
    end
  end
  always_comb begin
    in_valid = rst_n && (in_cw < NCW) && !(in_cw == 4 && cyc < 1300);
    for (int e = 0; e < Z; e++) in_llr[e] = Q_BITS'(llr[(in_cw < NCW) ? in_cw : 0][in_col*Z + e]);
  end

  // output side: held off for a while during codeword 1's result to create a stall
  int out_cw = 0, out_col = 0;
  bit got [NCW][NMAX];
  assign out_ready = !(cyc > 480 && cyc < 760);
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      for (int e = 0; e < Z; e++) got[out_cw][out_col*Z + e] = out_bits[e];
      if (out_col == C_COLS-1) begin
        checks++;
        if (!out_last) begin failures++; $display("out_last missing"); end
        out_col <= 0; out_cw <= out_cw + 1;
      end else out_col <= out_col + 1;
    end
  end

  // timing and mechanism monitors
  int start_cyc [$];
  int last_start = -1, n_overlap = 0, n_bypass = 0, n_reuse = 0, n_load_busy = 0;
  bit was_stalled = 0;
  int n_b2b = 0, n_idle = 0, n_stall = 0, n_start = 0, n_done = 0;
  always @(posedge clk) if (rst_n) begin
    if (cw_start) begin
      n_start++;
      if (cw_done) begin
        n_b2b++;
        checks++;
        if (!was_stalled && cyc - last_start != 1 + N_LAYERS*NIT) begin
          failures++; $display("back-to-back period %0d", cyc - last_start);
        end
      end
      start_cyc.push_back(cyc);
      last_start = cyc;
    end
    if (cw_done) begin
      int s;
      n_done++;
      s = start_cyc.pop_front();
      if (!was_stalled) begin
        checks++;
        if (cyc - s != 1 + N_LAYERS*NIT) begin failures++; $display("latency %0d", cyc - s); end
      end
    end
    if (dut.g_pipe.u_dec.p1_valid && dut.g_pipe.u_dec.write_en) n_overlap++;
    if (dut.g_pipe.u_dec.p1_valid && dut.g_pipe.u_dec.first_iter) n_bypass++;
    if (dut.g_pipe.u_dec.p1_valid && !dut.g_pipe.u_dec.first_iter) n_reuse++;
    if (in_valid && in_ready && (dut.g_pipe.u_dec.p1_valid || dut.g_pipe.u_dec.write_en)) n_load_busy++;
    if (en_decoder && !dut.g_pipe.u_dec.in_full && !dut.g_pipe.u_dec.p1_valid && !dut.g_pipe.u_dec.write_en && !stall && in_cw < NCW && n_start > 0) n_idle++;
    if (stall) n_stall++;
    // a stall delays the result; it is remembered until the delayed result leaves
    if (stall) was_stalled <= 1'b1;
    else if (cw_done) was_stalled <= 1'b0;
  end

  initial begin
    en_decoder = 1;
    #1 rst_n = 0;   // falling edge applies the asynchronous reset at once
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (out_cw == NCW);
    repeat (2) @(posedge clk);
    for (int c = 0; c < NCW; c++) begin
      bit hard [NMAX];
      int diff, nerr;
      decode(LUT_NSFAID3, Z, NIT, llr[c], hard);
      diff = 0; nerr = 0;
      for (int n = 0; n < N; n++) begin
        if (hard[n] != got[c][n]) diff++;
        if (got[c][n]) nerr++;
      end
      checks++;
      if (diff != 0) begin failures++; $display("codeword %0d: %0d bits differ from reference", c, diff); end
      if (expect_zero[c]) begin
        checks++;
        if (nerr != 0) begin failures++; $display("codeword %0d: %0d residual errors", c, nerr); end
      end
      $display("codeword %0d: %0d bits set, %0d differ from reference", c, nerr, diff);
    end
    $display("mechanisms: starts=%0d back_to_back=%0d overlap=%0d bypass=%0d reuse=%0d load_during_decode=%0d idle=%0d stall=%0d",
             n_start, n_b2b, n_overlap, n_bypass, n_reuse, n_load_busy, n_idle, n_stall);
    checks += 7;
    if (n_b2b == 0)       begin failures++; $display("no back-to-back start"); end
    if (n_overlap == 0)   begin failures++; $display("no P1/P2 overlap"); end
    if (n_bypass == 0)    begin failures++; $display("no first-iteration bypass"); end
    if (n_reuse == 0)     begin failures++; $display("no beta reuse"); end
    if (n_load_busy == 0) begin failures++; $display("no load during decoding"); end
    if (n_idle == 0)      begin failures++; $display("no idle waiting for input"); end
    if (n_stall == 0)     begin failures++; $display("no output stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
