// tb_azul_regfile: self-checking test of the 32 x 32-bit register file.
//
// Random writes on both ports against a reference array; checks x0 stays
// zero, both read ports, write-through of same-cycle writes, and that port B
// wins when both ports write one register.
module tb_azul_regfile;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [4:0]  ra1, ra2, waa, wab;
  logic [31:0] rd1, rd2, wda, wdb;
  logic        wea, web;
  int checks = 0, failures = 0;
  logic [31:0] model [32];

  azul_regfile #(.NREGS(32), .XLEN(32)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [31:0] expect_rd(input logic [4:0] a);
    if (a == 0) return 0;
    if (web && wab == a) return wdb;
    if (wea && waa == a) return wda;
    return model[a];
  endfunction

  initial begin
    for (int i = 0; i < 32; i++) model[i] = 0;
    wea = 0; web = 0; ra1 = 0; ra2 = 0; waa = 0; wab = 0; wda = 0; wdb = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      wea = $urandom % 2; web = ($urandom % 3) == 0;
      waa = 5'($urandom); wab = (i % 17 == 0) ? waa : 5'($urandom);
      wda = $urandom; wdb = $urandom;
      ra1 = 5'($urandom); ra2 = (i % 5 == 0) ? waa : 5'($urandom);
      #1;
      check(rd1 == expect_rd(ra1), "read port 1");
      check(rd2 == expect_rd(ra2), "read port 2");
      @(posedge clk);
      if (wea && waa != 0) model[waa] = wda;
      if (web && wab != 0) model[wab] = wdb;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
