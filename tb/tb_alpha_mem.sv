// tb_alpha_mem: checks the VN-message memory of the full-layer decoder.
//
// Random initial words (data_sel = 0) and VNU words (data_sel = 1) are
// written with random write enables; after each clock edge the whole memory
// must equal a model register that takes the selected word when we is high
// and holds otherwise. Reset must clear it. Reduced size (Z = 5, 6 slots).
module tb_alpha_mem;
  localparam int Z = 5, S = 6, QTB = 6;

  logic clk = 0, rst_n = 1, data_sel, we;
  logic [S-1:0][Z-1:0][QTB-1:0] init_data, vnu_data, alpha, model;

  alpha_mem #(.Z(Z), .S(S), .QTB(QTB)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    data_sel = 0; we = 0; init_data = '0; vnu_data = '0;
    #1 rst_n = 0;
    #2;
    checks++;
    if (alpha != '0) begin failures++; $display("not cleared by reset"); end
    @(negedge clk) rst_n = 1;
    model = '0;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      data_sel = 1'($urandom);
      we       = ($urandom_range(3, 0) != 0);
      for (int s = 0; s < S; s++)
        for (int e = 0; e < Z; e++) begin
          init_data[s][e] = QTB'($urandom);
          vnu_data[s][e]  = QTB'($urandom);
        end
      if (we) model = data_sel ? vnu_data : init_data;
      @(posedge clk); #1;
      checks++;
      if (alpha != model) begin failures++; $display("cycle %0d: content differs", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
