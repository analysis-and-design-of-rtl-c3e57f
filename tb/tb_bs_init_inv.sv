// tb_bs_init_inv: random AP-LLR blocks; hard bit n of column j must be the sign
// of element (n - last shift) mod z, i.e. BS_INIT followed by BS_INIT-bar
// returns every column to natural order.
module tb_bs_init_inv;
  import ldpc_pkg::*;
  localparam int Z = 54;
  logic [C_COLS-1:0][Z-1:0][QT_BITS-1:0] ap;
  logic [C_COLS-1:0][Z-1:0] bits;
  logic [C_COLS-1:0][Z-1:0][Q_BITS-1:0] llr;
  logic [C_COLS-1:0][Z-1:0][QT_BITS-1:0] ap_init;
  logic [C_COLS-1:0][Z-1:0] bits2;
  int checks = 0, failures = 0;
  bs_init_inv #(.Z(Z)) dut (.ap, .bits);
  bs_init #(.Z(Z)) u_fwd (.llr, .ap(ap_init));
  bs_init_inv #(.Z(Z)) dut2 (.ap(ap_init), .bits(bits2));
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int last [C_COLS];
    for (int j = 0; j < C_COLS; j++)
      for (int l = 0; l < N_LAYERS; l++)
        for (int k = 0; k < DC; k++) if (LAYER_COL[l][k] == j) last[j] = LAYER_SHIFT[l][k];
    for (int t = 0; t < 4; t++) begin
      for (int j = 0; j < C_COLS; j++) for (int e = 0; e < Z; e++) begin ap[j][e] = QT_BITS'($urandom); llr[j][e] = Q_BITS'($urandom); end
      #1;
      for (int j = 0; j < C_COLS; j++) begin
        checks += 2;
        for (int n = 0; n < Z; n++)
          if (bits[j][n] != ap[j][(n - last[j] + Z) % Z][QT_BITS-1]) begin failures++; break; end
        for (int n = 0; n < Z; n++)
          if (bits2[j][n] != llr[j][n][Q_BITS-1]) begin failures++; break; end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
