// tb_bs_init: random input words through BS_INIT; every output element is
// checked against the input element at (r + last shift of the column) mod z,
// sign-extended, with the last shift found by scanning the base matrix rows
// from the bottom.
module tb_bs_init;
  import ldpc_pkg::*;
  localparam int Z = 54;
  logic [C_COLS-1:0][Z-1:0][Q_BITS-1:0] llr;
  logic [C_COLS-1:0][Z-1:0][QT_BITS-1:0] ap;
  int checks = 0, failures = 0;
  bs_init #(.Z(Z)) dut (.*);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int last [C_COLS];
    for (int j = 0; j < C_COLS; j++) begin
      last[j] = -1;
      for (int l = 0; l < N_LAYERS; l++)
        for (int k = 0; k < DC; k++) if (LAYER_COL[l][k] == j) last[j] = LAYER_SHIFT[l][k];
    end
    for (int t = 0; t < 4; t++) begin
      for (int j = 0; j < C_COLS; j++) for (int e = 0; e < Z; e++) llr[j][e] = Q_BITS'($urandom);
      #1;
      for (int j = 0; j < C_COLS; j++) for (int r = 0; r < Z; r++) begin
        checks++;
        if ($signed(ap[j][r]) != $signed(llr[j][(r + last[j]) % Z])) begin
          failures++; if (failures < 5) $display("FAIL col %0d el %0d", j, r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
