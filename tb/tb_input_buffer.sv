// tb_input_buffer: loads two codewords of random columns into the SIPO input
// buffer and checks that column j lands in llr[j], that full rises after
// exactly C beats, that in_ready blocks further beats while full, and that
// take empties the buffer.
module tb_input_buffer;
  localparam int Z = 8, C = 24, QB = 4;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, take = 0, full;
  logic [Z-1:0][QB-1:0] in_llr;
  logic [C-1:0][Z-1:0][QB-1:0] llr, ref_w;
  int checks = 0, failures = 0;
  input_buffer #(.Z(Z), .C(C), .QB(QB)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (2000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask
  initial begin
    @(negedge clk); rst_n = 1;
    for (int w = 0; w < 2; w++) begin
      for (int j = 0; j < C; j++) begin
        for (int e = 0; e < Z; e++) ref_w[j][e] = QB'($urandom);
        @(negedge clk);
        chk(!full && in_ready, "ready while filling");
        in_valid = 1; in_llr = ref_w[j];
        @(posedge clk); #1; in_valid = 0;
      end
      chk(full, "full after C beats");
      chk(!in_ready, "not ready when full");
      chk(llr == ref_w, "parallel output");
      // extra beat must be ignored
      @(negedge clk); in_valid = 1; in_llr = '1; @(posedge clk); #1; in_valid = 0;
      chk(llr == ref_w, "no shift when full");
      @(negedge clk); take = 1; @(posedge clk); #1; take = 0;
      chk(!full && in_ready, "take empties");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
