// tb_azul_output_fsm: self-checking test of the output FSM.
//
// Random send requests from a model core and a randomly ready output queue;
// every message must reach the queue once, in order, and with full-rate
// sends into an always-ready queue the FSM must pass one message per cycle.
module tb_azul_output_fsm;
  import azul_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic tx_valid, tx_ready, q_valid, q_ready;
  msg_t tx_msg, q_msg;
  azul_output_fsm dut (.*);

  int checks = 0, failures = 0;
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

  msg_t sent [$];
  int   got = 0, got_at_phase2 = 0;
  bit   phase2;
  always @(posedge clk) begin
    if (rst_n && q_valid && q_ready) begin
      if (sent.size() == 0) check(0, "message from nowhere");
      else check(q_msg == sent.pop_front(), "order and contents");
      got++;
    end
  end

  initial begin
    tx_valid = 0; tx_msg = '0; q_ready = 0; phase2 = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      if (!(tx_valid && !tx_ready)) begin   // a held request keeps its message
        tx_valid = ($urandom % 2);
        tx_msg   = {$urandom, $urandom};
      end
      q_ready = ($urandom % 3) != 0;
      @(posedge clk);
      if (tx_valid && tx_ready) sent.push_back(tx_msg);
    end
    // full rate
    @(negedge clk);
    tx_valid = 0; q_ready = 1;
    repeat (3) @(negedge clk);
    got_at_phase2 = got;
    for (int i = 0; i < 100; i++) begin
      tx_valid = 1; tx_msg = {32'(i), 32'(~i)};
      #1 check(tx_ready, "ready every cycle at full rate");
      @(posedge clk);
      if (tx_valid && tx_ready) sent.push_back(tx_msg);
      @(negedge clk);
    end
    tx_valid = 0;
    repeat (3) @(negedge clk);
    check(got - got_at_phase2 == 100, "100 messages in 100 cycles");
    check(sent.size() == 0, "nothing lost");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
