// azul_top: the Azul spatial accelerator - a ROWS x COLS grid of tiles on a
// 2D torus network.
//
// Each tile holds its own part of a sparse matrix in its 64 KB data memory,
// runs short tasks on its pipelined RISC-V core, and talks to the other
// tiles only through 64-bit messages. Tile (r,c) is linked to its four
// neighbours: EAST (r, c+1), WEST (r, c-1), SOUTH (r+1, c), NORTH (r-1, c),
// wrapping around at the edges when TORUS = 1 (edge links unused and tied
// off when TORUS = 0).
//
// A host (the global controller) loads programs, task tables and data and
// starts tasks by sending messages into host_in, which enters the network at
// tile (0,0). Tasks return results to the host by sending to any row or
// column outside the grid (for example row 63); these leave on host_out at
// tile (0,0). Both host streams use valid/ready. tile_busy[r*COLS+c] is high
// while tile (r,c) is running a task.
//
// Following the paper: the 16 x 16 grid, the torus topology, tiles with
// their own SRAM and 64-bit messages addressed by row and column. The host
// attachment is this design's own.
module azul_top
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
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 host_in_valid,
  output logic                 host_in_ready,
  input  msg_t                 host_in_msg,
  output logic                 host_out_valid,
  input  logic                 host_out_ready,
  output msg_t                 host_out_msg,
  output logic [ROWS*COLS-1:0] tile_busy
);
  localparam int unsigned N = ROWS * COLS;

  logic [NPORTS-1:0] in_valid  [N];
  logic [NPORTS-1:0] in_ready  [N];
  msg_t              in_msg    [N][NPORTS];
  logic [NPORTS-1:0] out_valid [N];
  logic [NPORTS-1:0] out_ready [N];
  msg_t              out_msg   [N][NPORTS];

  function automatic int unsigned idx(input int r, input int c);
    return ((r + ROWS) % ROWS) * COLS + ((c + COLS) % COLS);
  endfunction

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam int unsigned ME = r * COLS + c;
      // neighbour reached through each port and the port it arrives on there
      localparam int unsigned NB_N = idx(r - 1, c);
      localparam int unsigned NB_S = idx(r + 1, c);
      localparam int unsigned NB_E = idx(r, c + 1);
      localparam int unsigned NB_W = idx(r, c - 1);
      localparam bit HAS_N = TORUS || (r > 0);
      localparam bit HAS_S = TORUS || (r < ROWS - 1);
      localparam bit HAS_E = TORUS || (c < COLS - 1);
      localparam bit HAS_W = TORUS || (c > 0);

      // inputs: what the neighbour sends towards me
      assign in_valid[ME][P_LOCAL] = 1'b0;
      assign in_msg[ME][P_LOCAL]   = '0;
      assign in_valid[ME][P_NORTH] = HAS_N && out_valid[NB_N][P_SOUTH];
      assign in_msg[ME][P_NORTH]   = out_msg[NB_N][P_SOUTH];
      assign in_valid[ME][P_SOUTH] = HAS_S && out_valid[NB_S][P_NORTH];
      assign in_msg[ME][P_SOUTH]   = out_msg[NB_S][P_NORTH];
      assign in_valid[ME][P_EAST]  = HAS_E && out_valid[NB_E][P_WEST];
      assign in_msg[ME][P_EAST]    = out_msg[NB_E][P_WEST];
      assign in_valid[ME][P_WEST]  = HAS_W && out_valid[NB_W][P_EAST];
      assign in_msg[ME][P_WEST]    = out_msg[NB_W][P_EAST];
      // output readies: the neighbour's input buffer on the facing port
      assign out_ready[ME][P_LOCAL] = 1'b0;
      assign out_ready[ME][P_NORTH] = HAS_N && in_ready[NB_N][P_SOUTH];
      assign out_ready[ME][P_SOUTH] = HAS_S && in_ready[NB_S][P_NORTH];
      assign out_ready[ME][P_EAST]  = HAS_E && in_ready[NB_E][P_WEST];
      assign out_ready[ME][P_WEST]  = HAS_W && in_ready[NB_W][P_EAST];

      logic h_in_valid, h_in_ready, h_out_valid;
      msg_t h_out_msg;

      azul_tile #(
        .ROWS(ROWS), .COLS(COLS), .TORUS(TORUS),
        .IMEM_WORDS(IMEM_WORDS), .DMEM_WORDS(DMEM_WORDS),
        .QUEUE_DEPTH(QUEUE_DEPTH), .LINK_DEPTH(LINK_DEPTH)
      ) u_tile (
        .clk, .rst_n,
        .my_row(ROW_W'(r)), .my_col(COL_W'(c)),
        .link_in_valid(in_valid[ME]), .link_in_ready(in_ready[ME]), .link_in_msg(in_msg[ME]),
        .link_out_valid(out_valid[ME]), .link_out_ready(out_ready[ME]), .link_out_msg(out_msg[ME]),
        .host_in_valid(h_in_valid), .host_in_ready(h_in_ready), .host_in_msg(host_in_msg),
        .host_out_valid(h_out_valid), .host_out_ready(host_out_ready), .host_out_msg(h_out_msg),
        .busy(tile_busy[ME])
      );

      if (r == 0 && c == 0) begin : g_host
        assign h_in_valid     = host_in_valid;
        assign host_in_ready  = h_in_ready;
        assign host_out_valid = h_out_valid;
        assign host_out_msg   = h_out_msg;
      end else begin : g_nohost
        assign h_in_valid = 1'b0;
      end
    end
  end
endmodule
