// tb_cnu: random framed messages (w = 3 and w = 4) into Z check nodes; for each
// check node the compressed word must hold the input signs, the smallest and
// second smallest magnitude index and the first position of the smallest,
// found here by sorting.
module tb_cnu;
  localparam int Z = 16, DC = 6;
  logic [DC-1:0][Z-1:0][2:0] msg3; logic [Z-1:0][6+4+3-1:0] cmp3;
  logic [DC-1:0][Z-1:0][3:0] msg4; logic [Z-1:0][6+6+3-1:0] cmp4;
  int checks = 0, failures = 0;
  cnu #(.Z(Z), .MW(3)) u3 (.msg(msg3), .cmp(cmp3));
  cnu #(.Z(Z), .MW(4)) u4 (.msg(msg4), .cmp(cmp4));
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int k = 0; k < DC; k++) for (int r = 0; r < Z; r++) begin msg3[k][r] = 3'($urandom); msg4[k][r] = 4'($urandom); end
      #1;
      for (int r = 0; r < Z; r++) begin
        int m [DC]; int s [DC]; int i1; logic [5:0] sg;
        // w = 3
        for (int k = 0; k < DC; k++) begin m[k] = msg3[k][r][1:0]; sg[k] = msg3[k][r][2]; end
        i1 = 0; for (int k = 1; k < DC; k++) if (m[k] < m[i1]) i1 = k;
        s = m; s.sort();
        checks++;
        if (cmp3[r] != {sg, 2'(s[0]), 2'(s[1]), 3'(i1)}) begin failures++; $display("FAIL w3 %h", cmp3[r]); end
        // w = 4
        for (int k = 0; k < DC; k++) begin m[k] = msg4[k][r][2:0]; sg[k] = msg4[k][r][3]; end
        i1 = 0; for (int k = 1; k < DC; k++) if (m[k] < m[i1]) i1 = k;
        s = m; s.sort();
        checks++;
        if (cmp4[r] != {sg, 3'(s[0]), 3'(s[1]), 3'(i1)}) begin failures++; $display("FAIL w4"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
