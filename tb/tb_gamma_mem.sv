// tb_gamma_mem: initial load through the DS (data_sel = 0), write-back of a
// subset of columns (data_sel = 1), the ap_wb look-ahead view, and that
// init data is ignored when data_sel = 1 and wr_en ignored when data_sel = 0.
module tb_gamma_mem;
  localparam int Z = 6, C = 24, QTB = 6;
  logic clk = 0, rst_n = 0, data_sel, init_we;
  logic [C-1:0][Z-1:0][QTB-1:0] init_data, wr_data, ap, ap_wb, model;
  logic [C-1:0] wr_en;
  int checks = 0, failures = 0;
  gamma_mem #(.Z(Z), .C(C), .QTB(QTB)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (2000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  function automatic logic [C-1:0][Z-1:0][QTB-1:0] rnd();
    for (int j = 0; j < C; j++) for (int e = 0; e < Z; e++) rnd[j][e] = QTB'($urandom);
  endfunction
  initial begin
    data_sel = 1; init_we = 0; wr_en = '0; init_data = '0; wr_data = '0;
    @(negedge clk); rst_n = 1;
    model = '0;
    for (int t = 0; t < 40; t++) begin
      @(negedge clk);
      init_data = rnd(); wr_data = rnd();
      wr_en = C'({$urandom, $urandom});
      data_sel = (t % 5 != 0);
      init_we = $urandom_range(1, 0);
      #1;
      checks++;
      for (int j = 0; j < C; j++) if (ap_wb[j] != (wr_en[j] ? wr_data[j] : model[j])) begin failures++; break; end
      for (int j = 0; j < C; j++)
        if (!data_sel) begin if (init_we) model[j] = init_data[j]; end
        else if (wr_en[j]) model[j] = wr_data[j];
      @(posedge clk); #1;
      checks++;
      if (ap != model) begin failures++; $display("FAIL memory content at step %0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
