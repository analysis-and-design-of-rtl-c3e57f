// tb_beta_mem: random writes and reads against an array model; read data must
// appear one cycle after the address, hold when re is low, and a same-cycle
// read of the written address must return the old word.
module tb_beta_mem;
  localparam int DEPTH = 12, WIDTH = 40;
  logic clk = 0, we = 0, re = 0;
  logic [3:0] waddr = 0, raddr = 0;
  logic [WIDTH-1:0] wdata = 0, rdata, expd;
  logic [WIDTH-1:0] model [DEPTH];
  int checks = 0, failures = 0;
  beta_mem #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    // fill every word first
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; waddr = 4'(a); wdata = {$urandom, 8'($urandom)}; model[a] = wdata;
    end
    @(negedge clk); we = 0;
    re = 1; raddr = 0; @(posedge clk); #1; expd = model[0];
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      re = ($urandom_range(3, 0) != 0); raddr = 4'($urandom_range(DEPTH-1, 0));
      we = $urandom_range(1, 0); waddr = (t % 7 == 0) ? raddr : 4'($urandom_range(DEPTH-1, 0));
      wdata = {$urandom, 8'($urandom)};
      if (re) expd = model[raddr];
      if (we) model[waddr] = wdata;
      @(posedge clk); #1;
      checks++;
      if (rdata != expd) begin failures++; if (failures < 5) $display("FAIL at %0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
