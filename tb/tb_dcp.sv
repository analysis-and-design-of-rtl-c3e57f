// tb_dcp: random compressed words (w = 3); the message towards input k must
// carry the xor of the other signs and min2 at indx_min1, min1 elsewhere.
module tb_dcp;
  localparam int Z = 16, DC = 6;
  logic [Z-1:0][12:0] cmp;
  logic [DC-1:0][Z-1:0][2:0] msg;
  int checks = 0, failures = 0;
  dcp #(.Z(Z), .MW(3)) dut (.*);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int t = 0; t < 300; t++) begin
      for (int r = 0; r < Z; r++) cmp[r] = 13'($urandom);
      #1;
      for (int r = 0; r < Z; r++) begin
        logic [5:0] sg; logic [1:0] m1, m2; logic [2:0] ix;
        sg = cmp[r][12:7]; m1 = cmp[r][6:5]; m2 = cmp[r][4:3]; ix = cmp[r][2:0];
        for (int k = 0; k < DC; k++) begin
          bit s;
          s = 0;
          for (int j = 0; j < DC; j++) if (j != k) s ^= sg[j];
          checks++;
          if (msg[k][r] != {s, (int'(ix) == k) ? m2 : m1}) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
