// tb_shift_factor: for every layer and lane, checks the column index against
// the base matrix row and the BS_R shift against (b - b_prev) mod z, with
// b_prev found by walking back through the rows (wrapping to the last row).
// Done for z = 54 and for a reduced z = 13.
module tb_shift_factor;
  import ldpc_pkg::*;
  logic [3:0] layer;
  logic [DC-1:0][4:0] col, col13;
  logic [DC-1:0][5:0] shift;
  logic [DC-1:0][3:0] shift13;
  int checks = 0, failures = 0;
  shift_factor #(.Z(54)) dut (.layer, .col, .shift);
  shift_factor #(.Z(13)) dut13 (.layer, .col(col13), .shift(shift13));
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  function automatic int bm(int l, int j);
    bm = -1;
    for (int k = 0; k < DC; k++) if (LAYER_COL[l][k] == j) bm = LAYER_SHIFT[l][k];
  endfunction
  initial begin
    for (int l = 0; l < N_LAYERS; l++) begin
      layer = 4'(l); #1;
      for (int k = 0; k < DC; k++) begin
        int j, b, bp, ll;
        j = LAYER_COL[l][k]; b = LAYER_SHIFT[l][k];
        ll = l; bp = -1;
        for (int d = 0; d < N_LAYERS && bp < 0; d++) begin
          ll = (ll == 0) ? N_LAYERS-1 : ll-1;
          bp = bm(ll, j);
        end
        checks += 3;
        if (int'(col[k]) != j || int'(col13[k]) != j) failures++;
        if (int'(shift[k]) != ((b - bp) % 54 + 54) % 54) begin failures++; $display("FAIL l%0d k%0d", l, k); end
        if (int'(shift13[k]) != ((b % 13 - bp % 13) + 13) % 13) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
