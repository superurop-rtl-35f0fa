// tb_azul_core: self-checking test of the pipelined PE core.
//
// The core is connected to an instruction memory and a data memory (both
// azul_sram), a message source standing in for the input queue, and a
// message sink standing in for the output path. A test program exercising
// ALU operations with back-to-back dependences, loads right after stores,
// byte and halfword accesses, a counted loop, taken and untaken branches, a
// call and return, fmul.s/fadd.s, send and recv is written into instruction
// memory, and the task is started twice:
//   run 1 - the sink is always ready and the source message is waiting;
//           the spacing of two sends separated by three instructions must
//           be exactly four cycles (one instruction per cycle);
//   run 2 - the sink's ready toggles randomly and the source message comes
//           late, so send and recv stall.
// Every message sent must equal the value worked out by hand, and the task's
// final ret (x1 is cleared at task start) must leave the core idle.
module tb_azul_core;
  import azul_pkg::*;
  import tb_rv_asm::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        start, busy;
  logic [15:0] start_pc;
  logic        imem_re, dmem_re, dmem_we;
  logic [13:0] imem_raddr, dmem_raddr, dmem_waddr;
  logic [31:0] imem_rdata, dmem_rdata, dmem_wdata;
  logic [3:0]  dmem_wbe;
  logic        rx_valid, rx_ready, tx_valid, tx_ready;
  msg_t        rx_msg, tx_msg;
  logic        pw_we;
  logic [13:0] pw_addr;
  logic [31:0] pw_data;

  azul_core dut (.*);
  azul_sram #(.WORDS(16384)) u_imem (.clk, .we(pw_we), .waddr(pw_addr), .wdata(pw_data), .wbe(4'hf),
                                     .re(imem_re), .raddr(imem_raddr), .rdata(imem_rdata));
  azul_sram #(.WORDS(16384)) u_dmem (.clk, .we(dmem_we), .waddr(dmem_waddr), .wdata(dmem_wdata), .wbe(dmem_wbe),
                                     .re(dmem_re), .raddr(dmem_raddr), .rdata(dmem_rdata));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- program
  logic [31:0] prog [128];
  int n;
  localparam int BASE = 16;   // program starts at byte address 0x40
  task automatic P(input logic [31:0] w); prog[n] = w; n++; endtask

  int jal_at, func_at;
  task automatic build();
    n = BASE;
    P(ADDI(5, 0, 100)); P(ADDI(6, 0, -7)); P(ADD(7, 5, 6)); P(SUB(8, 5, 7)); P(SLLI(9, 8, 4));
    P(LUI(10, 'h12345)); P(ORI(10, 10, 'h678)); P(SW(10, 0, 16)); P(LW(11, 0, 16)); P(ADDI(12, 11, 1));
    P(LB(13, 0, 19)); P(LH(14, 0, 16)); P(SW(0, 0, 20)); P(SB(6, 0, 20)); P(LW(15, 0, 20));
    P(ADDI(16, 0, 0)); P(ADDI(17, 0, 10));
    P(ADD(16, 16, 17)); P(ADDI(17, 17, -1)); P(BNE(17, 0, -8));      // sum 10..1
    P(BEQ(5, 6, 8)); P(ADDI(31, 0, 1));                             // not taken
    P(BLT(6, 5, 8)); P(ADDI(16, 0, 999));                           // taken: skip
    jal_at = n; P(32'd0);                                           // jal x20, func
    P(LUI(21, 'h3fc00)); P(LUI(22, 'h40000)); P(MUL_FP(23, 21, 22)); P(ADD_FP(24, 23, 21));
    P(LUI(25, 'hABCD0));
    P(SEND(25, 7)); P(SEND(25, 8)); P(SEND(25, 9)); P(SEND(25, 12)); P(SEND(25, 13));
    P(SEND(25, 14)); P(SEND(25, 15)); P(SEND(25, 16)); P(SEND(25, 18)); P(SEND(25, 23));
    P(SEND(25, 24));
    P(SEND(25, 5)); P(NOP()); P(NOP()); P(NOP()); P(SEND(25, 6));
    P(RECV(26, 27)); P(ADDI(28, 27, 1)); P(SEND(26, 28));
    P(SRAI(29, 6, 1)); P(SLT(30, 6, 5)); P(SEND(29, 30));
    P(RET());
    func_at = n;
    P(ADDI(18, 0, 42)); P(JALR(0, 20, 0));
    prog[jal_at] = JAL(20, (func_at - jal_at) * 4);
  endtask

  // expected messages
  localparam logic [31:0] M = 32'hABCD_0000;
  logic [63:0] expect_q [$];
  task automatic expected();
    logic [31:0] d [13] = '{93, 7, 112, 32'h1234_5679, 32'h12, 32'h5678, 32'hf9, 55, 42,
                            32'h4040_0000, 32'h4090_0000, 100, 32'hffff_fff9};
    for (int i = 0; i < 13; i++) expect_q.push_back({M, d[i]});
    expect_q.push_back({32'h1122_3344, 32'd501});
    expect_q.push_back({32'hffff_fffc, 32'd1});
  endtask

  // ------------------------------------------------------- source and sink
  bit   random_ready;
  int   rx_delay;
  int   cyc = 0;
  int   t_send [$];
  int   sent;
  bit   rx_taken;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (rx_valid && rx_ready) rx_taken <= 1'b1;

  always @(negedge clk) tx_ready = random_ready ? 1'($urandom % 2) : 1'b1;

  always @(posedge clk) begin
    if (rst_n && tx_valid && tx_ready) begin
      logic [63:0] e;
      t_send.push_back(cyc);
      sent++;
      if (expect_q.size() == 0) check(0, "unexpected message");
      else begin
        e = expect_q.pop_front();
        check(tx_msg == e, $sformatf("message %0d: got %h expected %h", sent, tx_msg, e));
      end
    end
  end

  task automatic run_task(input bit rnd, input int delay);
    int t0;
    random_ready = rnd;
    expect_q.delete();
    t_send.delete();
    sent = 0;
    expected();
    rx_valid = 1'b0;
    rx_taken = 1'b0;
    rx_msg   = '{meta: 32'h1122_3344, data: 32'd500};
    @(negedge clk);
    check(!busy, "idle before start");
    start = 1; start_pc = 16'(BASE * 4);
    @(negedge clk);
    start = 0;
    t0 = cyc;
    fork
      begin repeat (delay) @(negedge clk); rx_valid = 1'b1; end
    join_none
    while (busy || cyc - t0 < 5) begin
      @(negedge clk);
      if (rx_taken) rx_valid = 1'b0;   // a single message is offered
      if (cyc - t0 > 5000) break;
    end
    check(!busy, "core idle after ret");
    check(expect_q.size() == 0, $sformatf("all messages sent (%0d left)", expect_q.size()));
    if (!rnd) check(t_send.size() >= 13 && t_send[12] - t_send[11] == 4,
                    "one instruction per cycle between two sends");
  endtask

  initial begin
    start = 0; start_pc = 0; rx_valid = 0; rx_msg = '0; pw_we = 0; pw_addr = 0; pw_data = 0;
    random_ready = 0;
    for (int i = 0; i < 128; i++) prog[i] = NOP();
    build();
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 128; i++) begin
      pw_we = 1; pw_addr = 14'(i); pw_data = prog[i];
      @(negedge clk);
    end
    pw_we = 0;
    run_task(0, 0);
    run_task(1, 60);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
