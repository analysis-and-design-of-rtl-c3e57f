// tb_output_buffer: captures random codewords and reads them out with random
// out_ready; columns must leave in order 0..C-1 with out_last on the last, and
// busy must stay high until the last column is accepted.
module tb_output_buffer;
  localparam int Z = 8, C = 24;
  logic clk = 0, rst_n = 0, capture = 0, busy, out_valid, out_ready, out_last;
  logic [C-1:0][Z-1:0] bits, word;
  logic [Z-1:0] out_bits;
  int checks = 0, failures = 0;
  output_buffer #(.Z(Z), .C(C)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    out_ready = 0; bits = '0;
    @(negedge clk); rst_n = 1;
    for (int w = 0; w < 4; w++) begin
      @(negedge clk);
      checks++; if (busy || out_valid) failures++;
      for (int j = 0; j < C; j++) word[j] = Z'($urandom);
      bits = word; capture = 1;
      @(posedge clk); #1; capture = 0; bits = '0;
      for (int j = 0; j < C; ) begin
        @(negedge clk);
        out_ready = $urandom_range(1, 0);
        checks++;
        if (!busy || !out_valid || out_bits != word[j] || out_last != (j == C-1)) begin failures++; $display("FAIL w%0d col %0d", w, j); end
        @(posedge clk); #1;
        if (out_ready) j++;
      end
      out_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
