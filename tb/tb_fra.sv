// tb_fra: every q~-bit input in [-31, 31] through three framing units (min-sum
// identity, NS-FAID w = 3 F = [0,1,1,3,3,3,7,7], NS-FAID w = 2
// F = [+/-1,1,1,1,1,6,6,6]); the output must be the sign of the input and the
// position of F(min(|x|, 7)) in the image of F, the image being listed here
// by hand from the tables.
module tb_fra;
  import ldpc_pkg::*;
  logic [0:0][5:0] x;
  logic [0:0][3:0] m_ms;
  logic [0:0][2:0] m_3;
  logic [0:0][1:0] m_2;
  int checks = 0, failures = 0;
  fra #(.Z(1), .F_LUT(LUT_MS))      u_ms (.alpha(x), .msg(m_ms));
  fra #(.Z(1), .F_LUT(LUT_NSFAID3)) u_3  (.alpha(x), .msg(m_3));
  fra #(.Z(1), .F_LUT(LUT_NSFAID2)) u_2  (.alpha(x), .msg(m_2));
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int f3 [8] = '{0,1,1,3,3,3,7,7};
    int f2 [8] = '{1,1,1,1,1,6,6,6};
    int im3 [4] = '{0,1,3,7};
    int im2 [2] = '{1,6};
    for (int v = -31; v <= 31; v++) begin
      int m, i3, i2;
      x[0] = 6'(v); #1;
      m = (v < 0) ? -v : v; if (m > 7) m = 7;
      for (int i = 0; i < 4; i++) if (im3[i] == f3[m]) i3 = i;
      for (int i = 0; i < 2; i++) if (im2[i] == f2[m]) i2 = i;
      checks += 3;
      if (m_ms[0] != {v < 0, 3'(m)}) begin failures++; $display("FAIL ms %0d", v); end
      if (m_3[0]  != {v < 0, 2'(i3)}) begin failures++; $display("FAIL nsfaid3 %0d", v); end
      if (m_2[0]  != {v < 0, 1'(i2)}) begin failures++; $display("FAIL nsfaid2 %0d", v); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
