// tb_bs_r: every shift 0..z-1 on every lane with random data, z = 54;
// output element r must equal input element (r + shift) mod z.
module tb_bs_r;
  localparam int Z = 54, QTB = 6, DC = 6;
  logic [DC-1:0][Z-1:0][QTB-1:0] din, dout;
  logic [DC-1:0][5:0] shift;
  int checks = 0, failures = 0;
  bs_r #(.Z(Z), .QTB(QTB)) dut (.*);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int s = 0; s < Z; s++) begin
      for (int k = 0; k < DC; k++) begin
        for (int e = 0; e < Z; e++) din[k][e] = QTB'($urandom);
        shift[k] = 6'((s + 7*k) % Z);
      end
      #1;
      for (int k = 0; k < DC; k++) begin
        checks++;
        for (int r = 0; r < Z; r++)
          if (dout[k][r] != din[k][(r + int'(shift[k])) % Z]) begin failures++; break; end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
