// tb_vnu: all pairs of q~-bit AP-LLR in [-31, 31] and q-bit CN message in
// [-7, 7]; alpha must be the difference clipped to [-31, 31].
module tb_vnu;
  localparam int Z = 15;
  logic [Z-1:0][5:0] ap, alpha;
  logic [Z-1:0][3:0] beta;
  int checks = 0, failures = 0;
  vnu #(.Z(Z)) dut (.*);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int a = -31; a <= 31; a++) begin
      for (int b = -7; b <= 7; b++) begin ap[b+7] = 6'(a); beta[b+7] = 4'(b); end
      #1;
      for (int b = -7; b <= 7; b++) begin
        int e;
        e = a - b; if (e > 31) e = 31; if (e < -31) e = -31;
        checks++;
        if (int'($signed(alpha[b+7])) != e) begin failures++; if (failures < 5) $display("FAIL %0d - %0d", a, b); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
