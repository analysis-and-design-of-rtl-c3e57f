// tb_per_w: random lanes written to random distinct columns; checks that
// exactly those columns are enabled (only when write_en is high) and carry
// the data of their lane.
module tb_per_w;
  localparam int Z = 4, QTB = 6, C = 24, DC = 6;
  logic write_en;
  logic [DC-1:0][Z-1:0][QTB-1:0] lane;
  logic [DC-1:0][4:0] col;
  logic [C-1:0][Z-1:0][QTB-1:0] wr_data;
  logic [C-1:0] wr_en;
  int checks = 0, failures = 0;
  per_w #(.Z(Z), .QTB(QTB)) dut (.*);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int t = 0; t < 200; t++) begin
      int perm [C];
      for (int j = 0; j < C; j++) perm[j] = j;
      perm.shuffle();
      for (int k = 0; k < DC; k++) begin
        col[k] = 5'(perm[k]);
        for (int e = 0; e < Z; e++) lane[k][e] = QTB'($urandom);
      end
      write_en = (t % 4 != 0);
      #1;
      for (int j = 0; j < C; j++) begin
        int kk;
        kk = -1;
        for (int k = 0; k < DC; k++) if (perm[k] == j) kk = k;
        checks++;
        if (wr_en[j] != (write_en && kk >= 0)) failures++;
        if (kk >= 0) begin checks++; if (wr_data[j] != lane[kk]) failures++; end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
