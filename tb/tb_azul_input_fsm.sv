// tb_azul_input_fsm: self-checking test of the tile's network-input FSM.
//
// A model input queue offers random messages of every type (including an
// unknown one) while a model core reports busy/idle. The test checks that
// while idle each message is taken in one cycle and produces exactly the
// right write strobe and address (byte address >> 2 for the memories,
// addr[3:0] for the task table), that START_TASK pulses core_start with the
// task table's entry for that task and moves the FSM to RUN, that in RUN the
// queue is handed to the core's recv and nothing is written, that nothing is
// taken while the core is still busy, and that the FSM returns to IDLE once
// the core is idle again.
module tb_azul_input_fsm;
  import azul_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic q_valid, q_ready, core_busy, core_start, core_rx_valid, core_rx_ready;
  msg_t q_msg;
  logic [15:0] core_start_pc, lut_rdata;
  logic imem_we, dmem_we, lut_we, running;
  logic [13:0] imem_waddr, dmem_waddr;
  logic [31:0] wdata;
  logic [3:0]  lut_addr;

  azul_input_fsm dut (.*);

  // model task table: entry t holds 0x100 * t + 0x40
  assign lut_rdata = 16'(lut_addr) * 16'h100 + 16'h40;

  int checks = 0, failures = 0, starts = 0, recvs = 0, writes = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int busy_left;   // model core: busy for a few cycles after a start
  bit in_run;
  initial begin
    q_valid = 0; q_msg = '0; core_busy = 0; core_rx_ready = 0; busy_left = 0; in_run = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      q_valid = ($urandom % 3) != 0;
      q_msg.meta.row   = 6'($urandom);
      q_msg.meta.col   = 6'($urandom);
      q_msg.meta.ttype = 4'($urandom % 5);
      q_msg.meta.addr  = 16'($urandom);
      q_msg.data       = $urandom;
      core_rx_ready    = in_run && ($urandom % 2);
      core_busy        = busy_left > 0 || (($urandom % 8) == 0 && !in_run);
      #1;
      if (!in_run && !core_busy && q_valid) begin
        check(q_ready, "idle FSM takes the message");
        check(imem_we == (q_msg.meta.ttype == T_WRITE_IMEM), "imem_we");
        check(dmem_we == (q_msg.meta.ttype == T_WRITE_DMEM), "dmem_we");
        check(lut_we  == (q_msg.meta.ttype == T_WRITE_LUT), "lut_we");
        check(core_start == (q_msg.meta.ttype == T_START_TASK), "core_start");
        check(imem_waddr == q_msg.meta.addr[15:2] && dmem_waddr == q_msg.meta.addr[15:2], "addresses");
        check(lut_addr == q_msg.meta.addr[3:0] && wdata == q_msg.data, "table index and data");
        if (core_start) check(core_start_pc == q_msg.meta.addr[3:0] * 16'h100 + 16'h40, "start pc from table");
        if (q_msg.meta.ttype != T_START_TASK) writes++;
      end else if (!in_run) begin
        check(!q_ready && !imem_we && !dmem_we && !lut_we && !core_start, "nothing taken while busy or empty");
      end else begin
        check(q_ready == core_rx_ready && core_rx_valid == q_valid, "queue handed to the core");
        check(!imem_we && !dmem_we && !lut_we && !core_start, "no writes while running");
        if (q_valid && core_rx_ready) recvs++;
      end
      check(running == in_run, "state");
      @(posedge clk);
      // model core
      if (!in_run && core_start) begin
        in_run = 1; busy_left = 5 + ($urandom % 20); starts++;
      end else if (busy_left > 0) begin
        busy_left--;
      end else if (in_run && !core_busy) begin
        in_run = 0;
      end
    end
    check(starts > 10 && recvs > 10 && writes > 100, "all message kinds seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
