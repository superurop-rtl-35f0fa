// tb_azul_router: self-checking test of the five-port router.
//
// A router at position (1,3) of a 4 x 5 torus (and, in a second instance,
// of a 4 x 5 mesh) receives random messages on all five inputs with random
// destinations, some outside the grid, while its outputs are randomly ready.
// The expected output port of each message is worked out independently with
// modular ring distances; every message must leave once, on that port, and
// messages from one input to one output must keep their order. A final
// check requires every output port to have been used and every input to
// have been back-pressured at least once.
module tb_azul_router;
  import azul_pkg::*;
  localparam int ROWS = 4, COLS = 5, MYR = 1, MYC = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

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

  logic [NPORTS-1:0] in_valid, iv [2], in_ready [2], out_valid [2], out_ready;
  bit taken [2][NPORTS];
  for (genvar k = 0; k < 2; k++) begin : g_iv
    for (genvar p = 0; p < NPORTS; p++) begin : g_p
      assign iv[k][p] = in_valid[p] && !taken[k][p];
    end
  end
  msg_t in_msg [NPORTS];
  msg_t out_msg [2][NPORTS];

  azul_router #(.ROWS(ROWS), .COLS(COLS), .TORUS(1'b1), .LINK_DEPTH(2)) dut_t (
    .clk, .rst_n, .my_row(6'(MYR)), .my_col(6'(MYC)),
    .in_valid(iv[0]), .in_ready(in_ready[0]), .in_msg,
    .out_valid(out_valid[0]), .out_ready, .out_msg(out_msg[0]));
  azul_router #(.ROWS(ROWS), .COLS(COLS), .TORUS(1'b0), .LINK_DEPTH(2)) dut_m (
    .clk, .rst_n, .my_row(6'(MYR)), .my_col(6'(MYC)),
    .in_valid(iv[1]), .in_ready(in_ready[1]), .in_msg,
    .out_valid(out_valid[1]), .out_ready, .out_msg(out_msg[1]));

  // independent reference: ring distances with modulo arithmetic
  function automatic int expected_port(msg_t m, bit torus);
    int r, c, de, dw, ds, dn;
    r = m.meta.row; c = m.meta.col;
    if (r >= ROWS || c >= COLS) begin r = 0; c = 0; end
    if (c != MYC) begin
      if (!torus) return (c > MYC) ? 2 : 4;
      de = (c - MYC + COLS) % COLS; dw = (MYC - c + COLS) % COLS;
      return (de <= dw) ? 2 : 4;
    end
    if (r != MYR) begin
      if (!torus) return (r > MYR) ? 3 : 1;
      ds = (r - MYR + ROWS) % ROWS; dn = (MYR - r + ROWS) % ROWS;
      return (ds <= dn) ? 3 : 1;
    end
    return 0;
  endfunction

  // scoreboard: per router, per (input, output) an ordered list of tags
  int exp_q [2][NPORTS][NPORTS][$];
  int used [2][NPORTS];
  int stalled [NPORTS];

  // the tag (message number) is carried in data[15:0], the input in data[18:16]
  int tagc = 0;
  initial begin
    in_valid = '0; out_ready = '0;
    for (int p = 0; p < NPORTS; p++) in_msg[p] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      for (int p = 0; p < NPORTS; p++) begin
        // both routers must accept before a new message is presented
        if (!in_valid[p]) begin
          if ($urandom % 2) begin
            in_valid[p] = 1'b1;
            in_msg[p].meta.row   = ($urandom % 8 == 0) ? 6'd63 : 6'($urandom % ROWS);
            in_msg[p].meta.col   = 6'($urandom % COLS);
            in_msg[p].meta.ttype = 4'($urandom);
            in_msg[p].meta.addr  = 16'($urandom);
            in_msg[p].data       = {13'd0, 3'(p), 16'(tagc++)};
          end
        end
      end
      out_ready = 5'($urandom);
      @(posedge clk);
      for (int p = 0; p < NPORTS; p++) begin
        if ((iv[0][p] && !in_ready[0][p]) || (iv[1][p] && !in_ready[1][p])) stalled[p]++;
      end
    end
    // drain
    @(negedge clk);
    for (int p = 0; p < NPORTS; p++) in_valid[p] = 1'b0;
    out_ready = '1;
    repeat (50) @(negedge clk);
    for (int k = 0; k < 2; k++)
      for (int i = 0; i < NPORTS; i++)
        for (int o = 0; o < NPORTS; o++)
          check(exp_q[k][i][o].size() == 0, $sformatf("router %0d: undelivered %0d->%0d", k, i, o));
    for (int o = 0; o < NPORTS; o++) check(used[0][o] > 0 && used[1][o] > 0, "every output used");
    for (int p = 1; p < NPORTS; p++) check(stalled[p] > 0, "back-pressure seen on every link input");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Scoreboard. Each router takes the shared input independently; a message is
  // recorded in a router's scoreboard when that router accepts it. The input
  // is withdrawn only once both routers have taken it.
  always @(posedge clk) begin
    if (rst_n) begin
      for (int p = 0; p < NPORTS; p++) begin
        for (int k = 0; k < 2; k++) begin
          if (iv[k][p] && in_ready[k][p]) begin
            exp_q[k][p][expected_port(in_msg[p], k == 0)].push_back(int'(in_msg[p].data[15:0]));
            taken[k][p] <= 1'b1;
          end
        end
        if ((taken[0][p] || (iv[0][p] && in_ready[0][p])) && (taken[1][p] || (iv[1][p] && in_ready[1][p]))) begin
          taken[0][p] <= 1'b0; taken[1][p] <= 1'b0;
          in_valid[p] <= 1'b0;
        end
      end
      // then the outputs (a LOCAL input can pass straight through)
        for (int k = 0; k < 2; k++) begin
          for (int o = 0; o < NPORTS; o++) begin
            if (out_valid[k][o] && out_ready[o]) begin
              int src, tag;
              src = out_msg[k][o].data[18:16];
              tag = out_msg[k][o].data[15:0];
              used[k][o]++;
              if (exp_q[k][src][o].size() == 0) check(0, $sformatf("router %0d: message on wrong port %0d", k, o));
              else check(exp_q[k][src][o].pop_front() == tag,
                         $sformatf("router %0d: order/port from %0d to %0d", k, src, o));
            end
          end
        end
    end
  end

endmodule
