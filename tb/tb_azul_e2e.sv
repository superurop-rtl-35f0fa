// tb_azul_e2e: end-to-end test of the Azul grid, driven through the host
// port at tile (0,0). Instantiated by tb_azul_top (4 x 4 grid) and by
// tb_azul_top_full (the default 16 x 16 grid, top parameters untouched).
//
// 1. Load: for every tile the host sends instruction-memory writes (the two
//    task programs of tb_azul_prog), task-table writes and data-memory
//    writes (a CSR block of a random sparse matrix, the vector x, the
//    triangular-solve coefficients and the message headers).
// 2. SpMV: the host sends START_TASK(SPMV) to every tile, and only then one
//    message per tile carrying alpha, so the tiles wait in recv. Every tile
//    sends y_i = alpha * sum_j A_ij x_j for its rows to the host. Tile 0 owns
//    many rows and the host refuses output for a while, so the network and
//    the output queue back up and send stalls.
// 3. Triangular solve: the host starts CHAIN on tile 0 only; each tile
//    computes its x_k, returns it to the host and passes it on to the next
//    tile in row-major order (crossing the torus wrap-around links) with a
//    data-memory write and a START_TASK message.
// Matrix entries and vectors are small integers, so every floating-point
// result is exact and is compared for equality with integer arithmetic
// done here. The test also counts how often each mechanism occurred (memory,
// table and task-start messages, task returns, recv and send stalls, link
// back-pressure, wrap-around hops, host-output back-pressure) and counts a
// failure for any that never happened.
module tb_azul_e2e #(
  parameter int  R    = 4,
  parameter int  C    = 4,
  parameter bit  FULL = 1'b0,
  parameter int  WATCHDOG = 400000
) ();
  import azul_pkg::*;
  import tb_rv_asm::*;
  import tb_azul_prog::*;

  localparam int N  = R * C;
  localparam int NX = 16;        // length of x, replicated in every tile

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic host_in_valid, host_in_ready, host_out_valid, host_out_ready;
  msg_t host_in_msg, host_out_msg;
  logic [N-1:0] tile_busy;

  if (FULL) begin : g_full
    azul_top dut (.*);
  end else begin : g_small
    azul_top #(.ROWS(R), .COLS(C)) dut (.*);
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc++;
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired at cycle %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ----------------------------------------------------- mechanism counters
  int n_imem, n_dmem, n_lut, n_start, n_ret, n_recv_stall, n_send_stall;
  int n_link_bp, n_wrap, n_host_bp;
  for (genvar r = 0; r < R; r++) begin : g_pr
    for (genvar c = 0; c < C; c++) begin : g_pc
      localparam int ME = r * C + c;
      if (FULL) begin : g_f
        `define TILE g_full.dut.g_row[r].g_col[c].u_tile
        always @(posedge clk) if (rst_n) begin
          n_imem  += int'(`TILE.u_input_fsm.imem_we);
          n_dmem  += int'(`TILE.u_input_fsm.dmem_we);
          n_lut   += int'(`TILE.u_input_fsm.lut_we);
          n_start += int'(`TILE.u_input_fsm.core_start);
          n_recv_stall += int'(`TILE.u_core.stall && `TILE.u_core.c_e.is_recv);
          n_send_stall += int'(`TILE.u_core.stall && `TILE.u_core.c_e.is_send);
          for (int p = 1; p < NPORTS; p++)
            n_link_bp += int'(`TILE.link_out_valid[p] && !`TILE.link_out_ready[p]);
          if (r == 0)     n_wrap += int'(`TILE.link_out_valid[P_NORTH] && `TILE.link_out_ready[P_NORTH]);
          if (r == R - 1) n_wrap += int'(`TILE.link_out_valid[P_SOUTH] && `TILE.link_out_ready[P_SOUTH]);
          if (c == 0)     n_wrap += int'(`TILE.link_out_valid[P_WEST]  && `TILE.link_out_ready[P_WEST]);
          if (c == C - 1) n_wrap += int'(`TILE.link_out_valid[P_EAST]  && `TILE.link_out_ready[P_EAST]);
        end
        `undef TILE
      end else begin : g_s
        `define TILE g_small.dut.g_row[r].g_col[c].u_tile
        always @(posedge clk) if (rst_n) begin
          n_imem  += int'(`TILE.u_input_fsm.imem_we);
          n_dmem  += int'(`TILE.u_input_fsm.dmem_we);
          n_lut   += int'(`TILE.u_input_fsm.lut_we);
          n_start += int'(`TILE.u_input_fsm.core_start);
          n_recv_stall += int'(`TILE.u_core.stall && `TILE.u_core.c_e.is_recv);
          n_send_stall += int'(`TILE.u_core.stall && `TILE.u_core.c_e.is_send);
          for (int p = 1; p < NPORTS; p++)
            n_link_bp += int'(`TILE.link_out_valid[p] && !`TILE.link_out_ready[p]);
          if (r == 0)     n_wrap += int'(`TILE.link_out_valid[P_NORTH] && `TILE.link_out_ready[P_NORTH]);
          if (r == R - 1) n_wrap += int'(`TILE.link_out_valid[P_SOUTH] && `TILE.link_out_ready[P_SOUTH]);
          if (c == 0)     n_wrap += int'(`TILE.link_out_valid[P_WEST]  && `TILE.link_out_ready[P_WEST]);
          if (c == C - 1) n_wrap += int'(`TILE.link_out_valid[P_EAST]  && `TILE.link_out_ready[P_EAST]);
        end
        `undef TILE
      end
      logic busy_q;
      always @(posedge clk) begin
        busy_q <= tile_busy[ME];
        if (rst_n && busy_q && !tile_busy[ME]) n_ret++;
      end
    end
  end
  always @(posedge clk) if (rst_n) n_host_bp += int'(host_out_valid && !host_out_ready);

  // ----------------------------------------------------- host side
  msg_t to_send [$];
  task automatic put(int row, int col, int ttype, int addr, logic [31:0] data);
    to_send.push_back('{meta: META(row, col, ttype, addr), data: data});
  endtask

  // host_in driver: one message per accepted cycle
  initial host_in_valid = 1'b0;
  always @(negedge clk) begin
    if (!host_in_valid || host_in_ready_q) begin
      if (to_send.size() > 0) begin
        host_in_msg   <= to_send.pop_front();
        host_in_valid <= 1'b1;
      end else begin
        host_in_valid <= 1'b0;
      end
    end
  end
  logic host_in_ready_q;
  always @(posedge clk) host_in_ready_q <= host_in_valid && host_in_ready;

  // host_out collector
  bit block_out;
  logic [31:0] got [int];
  int n_got;
  always @(negedge clk) host_out_ready <= !block_out && (($urandom % 4) != 0);
  always @(posedge clk) begin
    if (rst_n && host_out_valid && host_out_ready) begin
      check(host_out_msg.meta.row == 6'd63, "host message row");
      check(!got.exists(int'(host_out_msg.meta.addr)), "result delivered once");
      got[int'(host_out_msg.meta.addr)] = host_out_msg.data;
      n_got++;
    end
  end

  // ----------------------------------------------------- workload
  logic [31:0] prog [256];
  int nrows [N], rowbase [N];
  int xv [NX];
  int yexp [int];
  int xk_exp [N];
  int alpha;

  task automatic wait_idle(input int expect_results, input string phase);
    int t0;
    t0 = cyc;
    while ((n_got < expect_results || tile_busy != '0 || to_send.size() > 0) && cyc - t0 < WATCHDOG)
      @(posedge clk);
    repeat (4) @(posedge clk);
    $display("%s finished after %0d cycles", phase, cyc - t0);
  endtask

  initial begin
    int total_rows, nnz, t0;
    block_out = 1'b0;
    host_out_ready = 1'b0;
    n_got = 0;
    build(prog);
    alpha = -2;
    for (int j = 0; j < NX; j++) xv[j] = int'($urandom % 7) - 3;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- 1. load
    total_rows = 0;
    for (int t = 0; t < N; t++) begin
      int r, c, rp, nr, nc;
      r = t / C; c = t % C;
      nrows[t]   = (t == 0) ? 24 : 1 + (t % 3);
      rowbase[t] = total_rows;
      total_rows += nrows[t];
      for (int w = SPMV_PC / 4; w < SPMV_PC / 4 + 32; w++) put(r, c, T_WRITE_IMEM, w * 4, prog[w]);
      for (int w = CHAIN_PC / 4; w < CHAIN_PC / 4 + 16; w++) put(r, c, T_WRITE_IMEM, w * 4, prog[w]);
      put(r, c, T_WRITE_LUT, TASK_SPMV, SPMV_PC);
      put(r, c, T_WRITE_LUT, TASK_CHAIN, CHAIN_PC);
      put(r, c, T_WRITE_DMEM, D_NROWS, nrows[t]);
      put(r, c, T_WRITE_DMEM, D_ROWBASE, rowbase[t]);
      put(r, c, T_WRITE_DMEM, D_META_HOST, META(63, 0, 0, 0));
      for (int j = 0; j < NX; j++) put(r, c, T_WRITE_DMEM, D_X + 4 * j, i2f(xv[j]));
      rp = 0;
      for (int i = 0; i < nrows[t]; i++) begin
        int k, acc;
        put(r, c, T_WRITE_DMEM, D_ROWPTR + 4 * i, rp);
        k = 1 + ($urandom % 4);
        acc = 0;
        for (int e = 0; e < k; e++) begin
          int col, v;
          col = $urandom % NX;
          v   = 1 + ($urandom % 4);
          put(r, c, T_WRITE_DMEM, D_COLIDX + 4 * rp, col);
          put(r, c, T_WRITE_DMEM, D_VALS + 4 * rp, i2f(v));
          acc += v * xv[col];
          rp++;
        end
        yexp[rowbase[t] + i] = acc * alpha;
      end
      put(r, c, T_WRITE_DMEM, D_ROWPTR + 4 * nrows[t], rp);
      // chain coefficients: x_k = (b_k + m_k * x_{k-1}) * d_k
      begin
        int b, m, d, nt;
        b = int'($urandom % 9) - 4;
        m = ($urandom % 2) ? 1 : -1;
        d = ($urandom % 2) ? 1 : -1;
        xk_exp[t] = (b + m * ((t == 0) ? 0 : xk_exp[t - 1])) * d;
        put(r, c, T_WRITE_DMEM, D_B, i2f(b));
        put(r, c, T_WRITE_DMEM, D_M, i2f(m));
        put(r, c, T_WRITE_DMEM, D_D, i2f(d));
        nt = (t + 1) % N;
        nr = nt / C; nc = nt % C;
        put(r, c, T_WRITE_DMEM, D_META_WR, META(nr, nc, T_WRITE_DMEM, D_XPREV));
        put(r, c, T_WRITE_DMEM, D_META_ST, META(nr, nc, T_START_TASK, TASK_CHAIN));
        put(r, c, T_WRITE_DMEM, D_LAST, (t == N - 1) ? 1 : 0);
        put(r, c, T_WRITE_DMEM, D_META_HX, META(63, 0, 0, 'h8000 + t));
        if (t == 0) put(r, c, T_WRITE_DMEM, D_XPREV, 0);
      end
    end
    $display("loading %0d messages into %0d tiles", to_send.size(), N);
    wait_idle(0, "load");

    // ---- 2. SpMV
    block_out = 1'b1;
    for (int t = 0; t < N; t++) put(t / C, t % C, T_START_TASK, TASK_SPMV, 0);
    for (int t = 0; t < N; t++) put(t / C, t % C, 4'hf, 0, i2f(alpha));
    t0 = cyc;
    while (cyc - t0 < 1500 + 4 * N) @(posedge clk);
    block_out = 1'b0;
    wait_idle(total_rows, "spmv");
    for (int i = 0; i < total_rows; i++) begin
      logic [31:0] e;
      // a zero sum scaled by a negative alpha is -0.0
      e = (yexp[i] == 0) ? {alpha < 0, 31'd0} : i2f(yexp[i]);
      check(got.exists(i) && got[i] == e,
            $sformatf("y[%0d] = %h expected %h", i, got.exists(i) ? got[i] : 0, e));
    end

    // ---- 3. chained triangular solve
    put(0, 0, T_START_TASK, TASK_CHAIN, 0);
    wait_idle(total_rows + N, "chain");
    for (int t = 0; t < N; t++) begin
      check(got.exists('h8000 + t) && got['h8000 + t] == i2f(xk_exp[t]),
            $sformatf("x[%0d] = %h expected %h", t, got.exists('h8000 + t) ? got['h8000 + t] : 0, i2f(xk_exp[t])));
    end
    check(n_got == total_rows + N, "no extra host messages");

    // ---- mechanisms
    $display("imem writes %0d, dmem writes %0d, table writes %0d, task starts %0d, task returns %0d",
             n_imem, n_dmem, n_lut, n_start, n_ret);
    $display("recv stall cycles %0d, send stall cycles %0d, link back-pressure %0d, wrap-around hops %0d, host back-pressure %0d",
             n_recv_stall, n_send_stall, n_link_bp, n_wrap, n_host_bp);
    check(n_imem == 48 * N, "instruction-memory writes");
    check(n_lut == 2 * N, "task-table writes");
    check(n_dmem > 0, "data-memory writes");
    check(n_start == 2 * N, "task starts");
    check(n_ret == 2 * N, "task returns");
    check(n_recv_stall > 0, "recv stalled");
    check(n_send_stall > 0, "send stalled");
    check(n_link_bp > 0, "link back-pressure");
    check(n_wrap > 0, "wrap-around links used");
    check(n_host_bp > 0, "host output back-pressure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
