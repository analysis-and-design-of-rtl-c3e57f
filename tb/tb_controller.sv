// tb_controller: runs the controller with N_ITER = 2 against a cycle model of
// the schedule: one init cycle, then 12 x 2 P1 cycles with count_layer_read
// 0..11 twice (first_iter only in the first pass), P2 one cycle behind
// (write_en, count_layer_write), beta_raddr one layer ahead, capture on the
// cycle after the last P1. Also checks the back-to-back start in the capture
// cycle, the stall while the output buffer is busy, and idling without input.
module tb_controller;
  localparam int NIT = 2, L = 12;
  logic clk = 0, rst_n = 0, en_decoder = 1, in_full = 0, out_busy = 0;
  logic init, data_sel, p1_valid, first_iter, en_mem, write_en, capture, stall;
  logic [3:0] count_layer_read, beta_raddr, count_layer_write;
  int checks = 0, failures = 0;
  controller #(.N_ITER(NIT)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (3000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask

  // check one full decode starting with the init cycle at the current negedge
  task automatic run_decode(input bit busy_at_end, input bit next_ready);
    chk(init && !data_sel && en_mem && beta_raddr == 0, "init cycle");
    @(posedge clk); #1;
    for (int i = 0; i < NIT; i++)
      for (int l = 0; l < L; l++) begin
        bit last;
        last = (i == NIT-1 && l == L-1);
        if (last) begin
          out_busy = busy_at_end;
          in_full = next_ready;
        end
        #1;
        chk(p1_valid && count_layer_read == 4'(l) && first_iter == (i == 0), "P1 layer");
        chk(!init && data_sel, "no init while decoding");
        chk(write_en == !(i == 0 && l == 0), "P2 valid");
        if (write_en) chk(count_layer_write == 4'((l + L - 1) % L), "P2 layer");
        chk(en_mem == !last, "beta read enable");
        if (!last) chk(beta_raddr == 4'((l + 1) % L), "beta read address");
        chk(!capture, "no early capture");
        @(posedge clk); #1;
      end
    // final P2 cycle
    chk(!p1_valid && write_en && count_layer_write == 4'(L-1), "final P2");
    chk(capture == !busy_at_end && stall == busy_at_end, "capture or stall");
  endtask

  initial begin
    @(negedge clk); rst_n = 1;
    repeat (3) begin @(negedge clk); chk(!init && !p1_valid && !write_en, "idle without input"); end
    in_full = 1; #1;
    run_decode(0, 1);           // ends with a back-to-back start
    chk(init, "back-to-back init");
    in_full = 1;
    run_decode(1, 1);           // ends stalled
    chk(!init, "no init while stalled");
    repeat (5) begin @(posedge clk); #1; chk(stall && !capture && !init, "stall holds"); end
    out_busy = 0; #1;
    chk(capture && init && !stall, "release: capture and init together");
    run_decode(0, 0);
    chk(!init, "idle after last codeword");
    @(posedge clk); #1;
    chk(!p1_valid && !write_en && !capture, "idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
