// tb_per_r: random AP-LLR blocks and random distinct lane-to-column maps;
// each lane must carry exactly the block of its column.
module tb_per_r;
  localparam int Z = 4, QTB = 6, C = 24, DC = 6;
  logic [C-1:0][Z-1:0][QTB-1:0] ap;
  logic [DC-1:0][4:0] col;
  logic [DC-1:0][Z-1:0][QTB-1:0] lane;
  int checks = 0, failures = 0;
  per_r #(.Z(Z), .QTB(QTB)) dut (.*);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int j = 0; j < C; j++) for (int e = 0; e < Z; e++) ap[j][e] = QTB'($urandom);
      for (int k = 0; k < DC; k++) col[k] = 5'($urandom_range(C-1, 0));
      #1;
      for (int k = 0; k < DC; k++) begin
        checks++;
        if (lane[k] != ap[col[k]]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
