// tb_fl_shift_net: checks the three permutation / shift networks of the
// full-layer decoder against index arithmetic done here from the base
// matrix, independently of the package's full-layer helpers.
//
// For random inputs it checks, at the default z = 54:
//   first: slot s of full layer 0 (row 4*0 + s/6, entry s%6, column j,
//          shift b) element e equals the sign-extended input llr[j][(e+b)%z];
//   next:  for each layer f, the AP-LLR of column j, VN element v, found in
//          the slot of layer f at position (v - b_f) mod z, appears in the
//          slot of layer f+1 (mod 3) at position (v - b_{f+1}) mod z;
//   bits:  bit v of column j equals the sign of the last layer's slot at
//          position (v - b_2) mod z.
module tb_fl_shift_net;
  import ldpc_pkg::*;
  localparam int Z = Z_DEF, C = C_COLS, LF = 3;

  logic [C-1:0][Z-1:0][Q_BITS-1:0]  llr;
  logic [C-1:0][Z-1:0][QT_BITS-1:0] first, ap, next;
  logic [1:0]                       layer;
  logic [C-1:0][Z-1:0]              bits;

  fl_shift_net #(.Z(Z)) dut (.*);

  int checks = 0, failures = 0;
  int slot_of [LF][C];   // slot of column j in full layer f
  int sh_of   [LF][C];   // shift of column j in full layer f

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int f = 0; f < LF; f++)
      for (int r = 0; r < 4; r++)
        for (int k = 0; k < DC; k++) begin
          slot_of[f][LAYER_COL[4*f + r][k]] = DC*r + k;
          sh_of[f][LAYER_COL[4*f + r][k]]   = LAYER_SHIFT[4*f + r][k] % Z;
        end
    for (int t = 0; t < 4; t++) begin
      for (int j = 0; j < C; j++)
        for (int e = 0; e < Z; e++) begin
          llr[j][e] = Q_BITS'($urandom);
          ap[j][e]  = QT_BITS'($urandom);
        end
      layer = 2'(t % LF);
      #1;
      for (int j = 0; j < C; j++)
        for (int v = 0; v < Z; v++) begin
          int f, fn, s, sn;
          logic [QT_BITS-1:0] x;
          // first
          s = slot_of[0][j];
          x = first[s][(v - sh_of[0][j] + Z) % Z];
          checks++;
          if (x != QT_BITS'($signed(llr[j][v]))) begin
            failures++; $display("first: column %0d element %0d", j, v);
          end
          // next
          f = t % LF; fn = (f + 1) % LF;
          s  = slot_of[f][j];
          sn = slot_of[fn][j];
          checks++;
          if (next[sn][(v - sh_of[fn][j] + Z) % Z] != ap[s][(v - sh_of[f][j] + Z) % Z]) begin
            failures++; $display("next: layer %0d column %0d element %0d", f, j, v);
          end
          // bits
          s = slot_of[LF-1][j];
          checks++;
          if (bits[j][v] != ap[s][(v - sh_of[LF-1][j] + Z) % Z][QT_BITS-1]) begin
            failures++; $display("bits: column %0d element %0d", j, v);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
