// controller: schedule of the two-stage pipelined layered decoder.
//
// A codeword is decoded in one initialisation cycle followed by L x N_ITER
// layer cycles. In the initialisation cycle (init) the input buffer is copied
// through BS_INIT into the AP-LLR memory (data_sel = 0). In each following
// cycle stage P1 processes layer count_layer_read (read, shift, VNU) while
// stage P2 finishes the previous layer count_layer_write (framing, CNU, AP-LLR
// update, write-back with write_en). first_iter tells P1 that no CN message
// has been stored yet, so beta is taken as 0. The beta memory is read one
// cycle ahead, on beta_raddr with en_mem.
// When P2 writes the last layer of the last iteration the codeword is done:
// capture hands the hard decision to the output buffer if it is free, and in
// the same cycle the next codeword is initialised if the input buffer is full,
// so codewords follow each other every 1 + L x N_ITER cycles. If the output
// buffer is still busy the finished word waits in the AP-LLR memory (a stall);
// if no input is ready the decoder idles. en_decoder low prevents new
// codewords from starting. The two-cycle pipeline with one layer in each stage
// follows the timing schedule of the architecture; the handling of input and
// output readiness is this design's choice.
module controller #(
  parameter int N_ITER = 20,
  localparam int L  = ldpc_pkg::N_LAYERS,
  localparam int LW = $clog2(L),
  localparam int IW = (N_ITER > 1) ? $clog2(N_ITER) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en_decoder,
  input  logic          in_full,
  input  logic          out_busy,
  output logic          init,
  output logic          data_sel,
  output logic          p1_valid,
  output logic [LW-1:0] count_layer_read,
  output logic          first_iter,
  output logic          en_mem,
  output logic [LW-1:0] beta_raddr,
  output logic          write_en,
  output logic [LW-1:0] count_layer_write,
  output logic          capture,
  output logic          stall
);
  logic [IW-1:0] iter;
  logic          p1_last, p2_last, pend, done_now, active;

  assign p1_last  = p1_valid && (count_layer_read == LW'(L-1)) && (iter == IW'(N_ITER-1));
  assign done_now = (write_en && p2_last) || pend;
  assign capture  = done_now && !out_busy;
  assign stall    = done_now && out_busy;
  assign active   = p1_valid || write_en || pend;
  assign init     = en_decoder && in_full && (!active || (capture && !p1_valid));
  assign data_sel = !init;
  assign first_iter = (iter == '0);

  // next layer read by P1, so that the beta word is ready when it is needed
  always_comb begin
    en_mem     = 1'b0;
    beta_raddr = '0;
    if (init) begin
      en_mem = 1'b1;
    end else if (p1_valid && !p1_last) begin
      en_mem     = 1'b1;
      beta_raddr = (count_layer_read == LW'(L-1)) ? '0 : count_layer_read + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p1_valid          <= 1'b0;
      count_layer_read  <= '0;
      iter              <= '0;
      write_en          <= 1'b0;
      count_layer_write <= '0;
      p2_last           <= 1'b0;
      pend              <= 1'b0;
    end else begin
      // stage P1
      if (init) begin
        p1_valid         <= 1'b1;
        count_layer_read <= '0;
        iter             <= '0;
      end else if (p1_valid) begin
        if (p1_last) begin
          p1_valid <= 1'b0;
        end else if (count_layer_read == LW'(L-1)) begin
          count_layer_read <= '0;
          iter             <= iter + 1'b1;
        end else begin
          count_layer_read <= count_layer_read + 1'b1;
        end
      end
      // stage P2 follows P1 by one cycle
      write_en          <= p1_valid;
      count_layer_write <= count_layer_read;
      p2_last           <= p1_last;
      pend              <= done_now && !capture;
    end
  end

  // consecutive layers share no column, so P1 and P2 never touch the same AP-LLR block
  always_ff @(posedge clk) begin
    if (rst_n && p1_valid && write_en)
      assert (count_layer_read != count_layer_write) else $error("controller: P1 and P2 on the same layer");
  end
endmodule
