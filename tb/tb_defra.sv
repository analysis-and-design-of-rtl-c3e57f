// tb_defra: every w-bit framed message for the three kernels; the q-bit output
// must be +/- the image element listed by hand from the framing tables.
module tb_defra;
  import ldpc_pkg::*;
  logic [0:0][3:0] m_ms; logic [0:0][2:0] m_3; logic [0:0][1:0] m_2;
  logic [0:0][3:0] b_ms, b_3, b_2;
  int checks = 0, failures = 0;
  defra #(.Z(1), .F_LUT(LUT_MS))      u_ms (.msg(m_ms), .beta(b_ms));
  defra #(.Z(1), .F_LUT(LUT_NSFAID3)) u_3  (.msg(m_3), .beta(b_3));
  defra #(.Z(1), .F_LUT(LUT_NSFAID2)) u_2  (.msg(m_2), .beta(b_2));
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int im3 [4] = '{0,1,3,7};
    int im2 [2] = '{1,6};
    for (int s = 0; s < 2; s++) begin
      for (int i = 0; i < 8; i++) begin
        m_ms[0] = {1'(s), 3'(i)}; m_3[0] = {1'(s), 2'(i % 4)}; m_2[0] = {1'(s), 1'(i % 2)};
        #1;
        checks += 3;
        if (int'($signed(b_ms[0])) != (s ? -i : i)) failures++;
        if (int'($signed(b_3[0])) != (s ? -im3[i%4] : im3[i%4])) begin failures++; $display("FAIL w3 s%0d i%0d", s, i); end
        if (int'($signed(b_2[0])) != (s ? -im2[i%2] : im2[i%2])) begin failures++; $display("FAIL w2 s%0d i%0d", s, i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
