// tb_azul_sram: self-checking test of the scratchpad memory at its full
// 16384 x 32-bit size.
//
// Writes random words with random byte enables to random addresses, then
// reads them back and compares with a reference array; checks the one-cycle
// read latency, that rdata holds while re is low, and read-before-write
// behaviour on an address collision.
module tb_azul_sram;
  localparam int WORDS = 16384;
  logic clk = 1'b0;
  logic we, re;
  logic [13:0] waddr, raddr;
  logic [31:0] wdata, rdata;
  logic [3:0]  wbe;
  int checks = 0, failures = 0;
  logic [31:0] model [int];

  azul_sram #(.WORDS(WORDS), .WIDTH(32)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [13:0] addrs [64];
  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0; wbe = 0;
    @(negedge clk);
    // full-word writes first so every tested word is defined
    for (int i = 0; i < 64; i++) begin
      addrs[i] = 14'($urandom);
      if (i == 0) addrs[i] = 14'h3fff;   // top word
      if (i == 1) addrs[i] = 14'h0000;
      we = 1; waddr = addrs[i]; wdata = $urandom; wbe = 4'hf;
      model[addrs[i]] = wdata;
      @(negedge clk);
    end
    // partial writes
    for (int i = 0; i < 200; i++) begin
      int k;
      k = $urandom % 64;
      we = 1; waddr = addrs[k]; wdata = $urandom; wbe = 4'($urandom);
      for (int b = 0; b < 4; b++) if (wbe[b]) model[addrs[k]][b*8 +: 8] = wdata[b*8 +: 8];
      @(negedge clk);
    end
    we = 0;
    // read back with one-cycle latency
    for (int i = 0; i < 64; i++) begin
      re = 1; raddr = addrs[i];
      @(negedge clk);
      check(rdata == model[addrs[i]], $sformatf("read %0h", addrs[i]));
    end
    // hold when re is low
    re = 0; raddr = addrs[5];
    @(negedge clk);
    check(rdata == model[addrs[63]], "rdata held while re low");
    // collision: old data returned, new data stored
    re = 1; we = 1; raddr = addrs[2]; waddr = addrs[2]; wdata = ~model[addrs[2]]; wbe = 4'hf;
    @(negedge clk);
    check(rdata == model[addrs[2]], "read-before-write");
    model[addrs[2]] = wdata;
    we = 0;
    @(negedge clk);
    check(rdata == model[addrs[2]], "written value visible next read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
