// azul_tile: one tile of the Azul grid - a processing element with its own
// memories and network interface.
//
// Contents: the pipelined core (with its register file, ALU and
// floating-point unit), a 64 KB instruction memory, a 64 KB data memory, the
// 16-entry task lookup table, the network input queue with its input FSM,
// the output FSM with the output queue, and the five-port router.
//
// Data paths: router LOCAL output -> input queue -> input FSM, which either
// writes a memory / the task table or starts a task, or, while a task runs,
// passes messages to the core's recv. The core's send -> output FSM ->
// output queue -> router LOCAL input. The data memory's single write port is
// shared: core stores while a task runs, input-FSM writes while it is idle.
//
// Host port: host_in messages are merged into the router's LOCAL input,
// alternating priority with the output queue (a choice, once offered, is
// kept until the router takes it); messages the router delivers
// locally whose destination lies outside the grid leave on host_out. Only
// tile (0,0) of a grid has these connected; elsewhere host_in_valid is tied
// low and no such message ever arrives.
//
// The link arrays are indexed by port number, so their LOCAL entries exist
// but have no link: those outputs (valid, ready and the 64-bit message) are
// tied to zero.
//
// Following the paper: the tile contents, the memory sizes and the message
// handling. The host attachment and queue sizes are this design's own.
module azul_tile
  import azul_pkg::*;
#(
  parameter int unsigned ROWS        = 16,
  parameter int unsigned COLS        = 16,
  parameter bit          TORUS       = 1'b1,
  parameter int unsigned IMEM_WORDS  = 16384,
  parameter int unsigned DMEM_WORDS  = 16384,
  parameter int unsigned QUEUE_DEPTH = 16,
  parameter int unsigned LINK_DEPTH  = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ROW_W-1:0]  my_row,
  input  logic [COL_W-1:0]  my_col,
  // links to the neighbours, indexed by port_e (entry P_LOCAL unused)
  input  logic [NPORTS-1:0] link_in_valid,
  output logic [NPORTS-1:0] link_in_ready,
  input  msg_t              link_in_msg  [NPORTS],
  output logic [NPORTS-1:0] link_out_valid,
  input  logic [NPORTS-1:0] link_out_ready,
  output msg_t              link_out_msg [NPORTS],
  // host port
  input  logic              host_in_valid,
  output logic              host_in_ready,
  input  msg_t              host_in_msg,
  output logic              host_out_valid,
  input  logic              host_out_ready,
  output msg_t              host_out_msg,
  // status
  output logic              busy
);
  localparam int unsigned IAW = $clog2(IMEM_WORDS);
  localparam int unsigned DAW = $clog2(DMEM_WORDS);

  // ------------------------------------------------------------ router
  logic [NPORTS-1:0] r_in_valid, r_in_ready, r_out_valid, r_out_ready;
  msg_t              r_in_msg [NPORTS];
  msg_t              r_out_msg [NPORTS];

  azul_router #(.ROWS(ROWS), .COLS(COLS), .TORUS(TORUS), .LINK_DEPTH(LINK_DEPTH)) u_router (
    .clk, .rst_n, .my_row, .my_col,
    .in_valid(r_in_valid), .in_ready(r_in_ready), .in_msg(r_in_msg),
    .out_valid(r_out_valid), .out_ready(r_out_ready), .out_msg(r_out_msg)
  );

  for (genvar p = 1; p < NPORTS; p++) begin : g_links
    assign r_in_valid[p]     = link_in_valid[p];
    assign link_in_ready[p]  = r_in_ready[p];
    assign r_in_msg[p]       = link_in_msg[p];
    assign link_out_valid[p] = r_out_valid[p];
    assign r_out_ready[p]    = link_out_ready[p];
    assign link_out_msg[p]   = r_out_msg[p];
  end
  assign link_in_ready[P_LOCAL]  = 1'b0;
  assign link_out_valid[P_LOCAL] = 1'b0;
  assign link_out_msg[P_LOCAL]   = '0;

  // ------------------------------------------------- local ejection
  logic to_host;
  logic iq_in_valid, iq_in_ready;
  assign to_host = (32'(r_out_msg[P_LOCAL].meta.row) >= ROWS) ||
                   (32'(r_out_msg[P_LOCAL].meta.col) >= COLS);
  assign host_out_valid       = r_out_valid[P_LOCAL] && to_host;
  assign host_out_msg         = r_out_msg[P_LOCAL];
  assign iq_in_valid          = r_out_valid[P_LOCAL] && !to_host;
  assign r_out_ready[P_LOCAL] = to_host ? host_out_ready : iq_in_ready;

  logic iq_valid, iq_ready;
  msg_t iq_msg;
  azul_fifo #(.WIDTH(MSG_W), .DEPTH(QUEUE_DEPTH)) u_in_queue (
    .clk, .rst_n,
    .in_valid(iq_in_valid), .in_ready(iq_in_ready), .in_data(r_out_msg[P_LOCAL]),
    .out_valid(iq_valid), .out_ready(iq_ready), .out_data(iq_msg),
    .count()
  );

  // ------------------------------------------------- local injection
  logic oq_valid, oq_ready, host_first;
  msg_t oq_msg;
  logic pick_host, lock_v, lock_host;
  // A choice offered to the router and not yet taken is kept.
  assign pick_host             = lock_v ? lock_host : host_in_valid && (host_first || !oq_valid);
  assign r_in_valid[P_LOCAL]   = host_in_valid || oq_valid;
  assign r_in_msg[P_LOCAL]     = pick_host ? host_in_msg : oq_msg;
  assign host_in_ready         = pick_host && r_in_ready[P_LOCAL];
  assign oq_ready              = !pick_host && r_in_ready[P_LOCAL];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      host_first <= 1'b0;
      lock_v     <= 1'b0;
      lock_host  <= 1'b0;
    end else begin
      if (r_in_valid[P_LOCAL] && r_in_ready[P_LOCAL]) host_first <= !pick_host;
      lock_v    <= r_in_valid[P_LOCAL] && !r_in_ready[P_LOCAL];
      lock_host <= pick_host;
    end
  end

  // ------------------------------------------------- input FSM, task table
  logic             core_busy, core_start, core_rx_valid, core_rx_ready;
  logic [ADDR_W-1:0] core_start_pc, lut_rdata;
  logic             fsm_imem_we, fsm_dmem_we, lut_we, fsm_running;
  logic [IAW-1:0]   fsm_imem_waddr;
  logic [DAW-1:0]   fsm_dmem_waddr;
  logic [XLEN-1:0]  fsm_wdata;
  logic [$clog2(NTASKS)-1:0] lut_addr;

  azul_input_fsm #(.IMEM_WORDS(IMEM_WORDS), .DMEM_WORDS(DMEM_WORDS)) u_input_fsm (
    .clk, .rst_n,
    .q_valid(iq_valid), .q_ready(iq_ready), .q_msg(iq_msg),
    .core_busy, .core_start, .core_start_pc,
    .core_rx_valid, .core_rx_ready,
    .imem_we(fsm_imem_we), .imem_waddr(fsm_imem_waddr),
    .dmem_we(fsm_dmem_we), .dmem_waddr(fsm_dmem_waddr),
    .wdata(fsm_wdata),
    .lut_we, .lut_addr, .lut_rdata,
    .running(fsm_running)
  );

  azul_task_lut #(.NTASKS(NTASKS), .PC_W(ADDR_W)) u_task_lut (
    .clk, .rst_n,
    .we(lut_we), .waddr(lut_addr), .wdata(fsm_wdata[ADDR_W-1:0]),
    .raddr(lut_addr), .rdata(lut_rdata)
  );

  // ------------------------------------------------- core and memories
  logic             imem_re;
  logic [IAW-1:0]   imem_raddr;
  logic [XLEN-1:0]  imem_rdata;
  logic             dmem_re, core_dmem_we;
  logic [DAW-1:0]   dmem_raddr, core_dmem_waddr;
  logic [XLEN-1:0]  dmem_rdata, core_dmem_wdata;
  logic [3:0]       core_dmem_wbe;
  logic             tx_valid, tx_ready;
  msg_t             tx_msg;

  azul_core #(.IMEM_WORDS(IMEM_WORDS), .DMEM_WORDS(DMEM_WORDS)) u_core (
    .clk, .rst_n,
    .start(core_start), .start_pc(core_start_pc), .busy(core_busy),
    .imem_re, .imem_raddr, .imem_rdata,
    .dmem_re, .dmem_raddr, .dmem_rdata,
    .dmem_we(core_dmem_we), .dmem_waddr(core_dmem_waddr),
    .dmem_wdata(core_dmem_wdata), .dmem_wbe(core_dmem_wbe),
    .rx_valid(core_rx_valid), .rx_ready(core_rx_ready), .rx_msg(iq_msg),
    .tx_valid, .tx_ready, .tx_msg
  );

  azul_sram #(.WORDS(IMEM_WORDS), .WIDTH(XLEN)) u_imem (
    .clk,
    .we(fsm_imem_we), .waddr(fsm_imem_waddr), .wdata(fsm_wdata), .wbe(4'hf),
    .re(imem_re), .raddr(imem_raddr), .rdata(imem_rdata)
  );

  azul_sram #(.WORDS(DMEM_WORDS), .WIDTH(XLEN)) u_dmem (
    .clk,
    .we(core_dmem_we || fsm_dmem_we),
    .waddr(core_dmem_we ? core_dmem_waddr : fsm_dmem_waddr),
    .wdata(core_dmem_we ? core_dmem_wdata : fsm_wdata),
    .wbe(core_dmem_we ? core_dmem_wbe : 4'hf),
    .re(dmem_re), .raddr(dmem_raddr), .rdata(dmem_rdata)
  );

  // ------------------------------------------------- output path
  logic of_valid, of_ready;
  msg_t of_msg;
  azul_output_fsm u_output_fsm (
    .clk, .rst_n,
    .tx_valid, .tx_ready, .tx_msg,
    .q_valid(of_valid), .q_ready(of_ready), .q_msg(of_msg)
  );

  azul_fifo #(.WIDTH(MSG_W), .DEPTH(QUEUE_DEPTH)) u_out_queue (
    .clk, .rst_n,
    .in_valid(of_valid), .in_ready(of_ready), .in_data(of_msg),
    .out_valid(oq_valid), .out_ready(oq_ready), .out_data(oq_msg),
    .count()
  );

  assign busy = core_busy || fsm_running;

  // The core and the input FSM never write the data memory together.
  a_dmem_excl: assert property (@(posedge clk) disable iff (!rst_n) !(core_dmem_we && fsm_dmem_we));
endmodule
