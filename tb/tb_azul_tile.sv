// tb_azul_tile: self-checking test of one tile, placed at (0,0) of a 2 x 2
// torus, with the testbench playing the host and the neighbouring tiles.
//
// Over the host port it loads a short task into instruction memory, puts it
// in task-table entry 5, and writes three message headers into data memory.
// Then, 20 times with random v and d: a neighbour writes v into data memory
// over the WEST link, the host starts task 5 and sends a second message
// whose data d the task takes with recv, and the host output is sometimes
// held off for a while. The task sends v + d to the host (a row outside the
// grid), v + d to tile (0,1) and v to tile (1,0). The test checks each
// message on the host output, the EAST link and the SOUTH link, that
// nothing else leaves the tile, that the tile is idle before each task and
// goes busy within a few cycles of the start message.
module tb_azul_tile;
  import azul_pkg::*;
  import tb_rv_asm::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NPORTS-1:0] link_in_valid, link_in_ready, link_out_valid, link_out_ready;
  msg_t link_in_msg [NPORTS];
  msg_t link_out_msg [NPORTS];
  logic host_in_valid, host_in_ready, host_out_valid, host_out_ready, busy;
  msg_t host_in_msg, host_out_msg;

  azul_tile #(.ROWS(2), .COLS(2), .TORUS(1'b1), .IMEM_WORDS(16384), .DMEM_WORDS(16384)) dut (
    .clk, .rst_n, .my_row(6'd0), .my_col(6'd0),
    .link_in_valid, .link_in_ready, .link_in_msg,
    .link_out_valid, .link_out_ready, .link_out_msg,
    .host_in_valid, .host_in_ready, .host_in_msg,
    .host_out_valid, .host_out_ready, .host_out_msg, .busy);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc++;

  // host sender
  task automatic host_send(input logic [31:0] meta, input logic [31:0] data);
    @(negedge clk);
    host_in_valid = 1'b1;
    host_in_msg   = '{meta: meta, data: data};
    do @(posedge clk); while (!host_in_ready);
    @(negedge clk);
    host_in_valid = 1'b0;
  endtask

  // collectors
  msg_t host_got [$], east_got [$], south_got [$];
  int   other = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (host_out_valid && host_out_ready) host_got.push_back(host_out_msg);
      if (link_out_valid[P_EAST] && link_out_ready[P_EAST]) east_got.push_back(link_out_msg[P_EAST]);
      if (link_out_valid[P_SOUTH] && link_out_ready[P_SOUTH]) south_got.push_back(link_out_msg[P_SOUTH]);
      if (link_out_valid[P_NORTH] || link_out_valid[P_WEST]) other++;
    end
  end

  logic [31:0] v, d;
  logic [31:0] prog [10];
  int t_start, t_busy;
  initial begin
    link_in_valid = '0; link_out_ready = '1; host_in_valid = 0; host_out_ready = 1;
    host_in_msg = '0;
    for (int p = 0; p < NPORTS; p++) link_in_msg[p] = '0;
    prog = '{LW(5, 0, 'h10), RECV(6, 7), ADD(8, 5, 7), LW(10, 0, 'h20), LW(11, 0, 'h24),
             LW(12, 0, 'h28), SEND(10, 8), SEND(11, 8), SEND(12, 5), RET()};
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 10; i++) host_send(META(0, 0, T_WRITE_IMEM, 'h80 + 4 * i), prog[i]);
    host_send(META(0, 0, T_WRITE_LUT, 5), 32'h80);
    host_send(META(0, 0, T_WRITE_DMEM, 'h20), META(63, 0, 0, 7));
    host_send(META(0, 0, T_WRITE_DMEM, 'h24), META(0, 1, 0, 8));
    host_send(META(0, 0, T_WRITE_DMEM, 'h28), META(1, 0, 0, 9));
    for (int it = 0; it < 20; it++) begin
      v = $urandom; d = $urandom;
      host_got.delete(); east_got.delete(); south_got.delete();
      // neighbour writes v over the WEST link
      @(negedge clk);
      link_in_valid[P_WEST] = 1'b1;
      link_in_msg[P_WEST]   = '{meta: META(0, 0, T_WRITE_DMEM, 'h10), data: v};
      do @(posedge clk); while (!link_in_ready[P_WEST]);
      @(negedge clk);
      link_in_valid[P_WEST] = 1'b0;
      repeat (10) @(negedge clk);
      check(!busy, "idle before the task");
      // start task 5, then the recv operand; the host output is sometimes slow
      host_out_ready = ($urandom_range(0, 1) == 0);
      t_start = cyc;
      host_send(META(0, 0, T_START_TASK, 5), 0);
      while (!busy) @(posedge clk);
      t_busy = cyc;
      host_send(META(0, 0, 4'hf, 0), d);
      repeat ($urandom_range(0, 40)) @(negedge clk);
      host_out_ready = 1'b1;
      while (busy) @(posedge clk);
      repeat (20) @(negedge clk);
      check(host_got.size() == 1 && host_got[0].data == v + d && host_got[0].meta == META(63, 0, 0, 7), "result to host");
      check(east_got.size() == 1 && east_got[0].data == v + d && east_got[0].meta == META(0, 1, 0, 8), "result to (0,1)");
      check(south_got.size() == 1 && south_got[0].data == v && south_got[0].meta == META(1, 0, 0, 9), "result to (1,0)");
      check(other == 0, "nothing on NORTH or WEST");
      // host message -> router -> input queue -> FSM -> core: a few cycles
      check(t_busy - t_start <= 6, $sformatf("start latency %0d cycles", t_busy - t_start));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
