// tb_azul_task_lut: self-checking test of the 16-entry task lookup table.
//
// Checks reset to zero, then random writes against a reference table with
// asynchronous reads of every entry.
module tb_azul_task_lut;
  logic clk = 1'b0, rst_n = 1'b0;
  logic we;
  logic [3:0]  waddr, raddr;
  logic [15:0] wdata, rdata;
  int checks = 0, failures = 0;
  logic [15:0] model [16];

  azul_task_lut #(.NTASKS(16), .PC_W(16)) dut (.*);
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

  initial begin
    we = 0; waddr = 0; wdata = 0; raddr = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 16; i++) begin
      model[i] = 0;
      raddr = 4'(i); #1;
      check(rdata == 0, "reset value");
    end
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      we = $urandom % 2; waddr = 4'($urandom); wdata = 16'($urandom); raddr = 4'($urandom);
      #1;
      check(rdata == model[raddr], "read");
      @(posedge clk);
      if (we) model[waddr] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 16; i++) begin
      raddr = 4'(i); #1;
      check(rdata == model[i], "final contents");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
