// azul_router: five-port network-on-chip router of one tile.
//
// Ports are numbered LOCAL, NORTH, EAST, SOUTH, WEST (azul_pkg::port_e).
// Every message is a single 64-bit flit carrying its destination row and
// column in the metadata word. The four link inputs each have a small FIFO
// (LINK_DEPTH entries); the local input is the tile's output path, already
// buffered. Routing is dimension ordered: first along the row to the
// destination column (EAST = column + 1, WEST = column - 1), then along the
// column to the destination row (SOUTH = row + 1, NORTH = row - 1), then out
// of LOCAL. With TORUS = 1 the rows and columns wrap around and each hop
// goes the shorter way round the ring (ties go EAST / SOUTH); with TORUS = 0
// the grid is a mesh. A destination outside the ROWS x COLS grid is routed
// to tile (0,0), where the host port receives it.
//
// Each output has a round-robin arbiter over the inputs that want it; a
// granted input moves one flit per cycle when the output's ready is high,
// and while the output is not ready the grant is kept, so an offered flit
// stays offered unchanged until it is taken.
// Ready signals come from the downstream FIFOs' own state, so a flit takes
// one cycle per hop plus queueing. The tile position is an input, not a
// parameter, so that every router of a grid is the same module.
//
// Following the paper: a 2D torus of tiles exchanging 64-bit messages
// addressed by row and column. This design's own choices: routing order,
// buffering, arbitration and the host mapping. As the paper says of Azul,
// nothing prevents deadlock: the rings have no virtual channels, so cyclic
// waits under heavy traffic are possible.
module azul_router
  import azul_pkg::*;
#(
  parameter int unsigned ROWS       = 16,
  parameter int unsigned COLS       = 16,
  parameter bit          TORUS      = 1'b1,
  parameter int unsigned LINK_DEPTH = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [ROW_W-1:0] my_row,
  input  logic [COL_W-1:0] my_col,
  input  logic [NPORTS-1:0] in_valid,
  output logic [NPORTS-1:0] in_ready,
  input  msg_t             in_msg  [NPORTS],
  output logic [NPORTS-1:0] out_valid,
  input  logic [NPORTS-1:0] out_ready,
  output msg_t             out_msg [NPORTS]
);
  // ---------------------------------------------------- input buffering
  logic [NPORTS-1:0] h_valid, h_pop;
  msg_t              h_msg [NPORTS];

  assign h_valid[P_LOCAL] = in_valid[P_LOCAL];
  assign h_msg[P_LOCAL]   = in_msg[P_LOCAL];
  assign in_ready[P_LOCAL] = h_pop[P_LOCAL];

  for (genvar p = 1; p < NPORTS; p++) begin : g_buf
    azul_fifo #(.WIDTH(MSG_W), .DEPTH(LINK_DEPTH)) u_buf (
      .clk, .rst_n,
      .in_valid(in_valid[p]), .in_ready(in_ready[p]), .in_data(in_msg[p]),
      .out_valid(h_valid[p]), .out_ready(h_pop[p]), .out_data(h_msg[p]),
      .count()
    );
  end

  // ---------------------------------------------------- route computation
  function automatic port_e route(input meta_t m, input logic [ROW_W-1:0] r0,
                                  input logic [COL_W-1:0] c0);
    int unsigned dr, dc, dstr, dstc, r, c;
    r = 32'(r0);
    c = 32'(c0);
    if (32'(m.row) >= ROWS || 32'(m.col) >= COLS) begin
      dstr = 0; dstc = 0;
    end else begin
      dstr = 32'(m.row); dstc = 32'(m.col);
    end
    dc = (dstc >= c) ? dstc - c : dstc + COLS - c;   // eastward distance
    dr = (dstr >= r) ? dstr - r : dstr + ROWS - r;   // southward distance
    if (dstc != c) begin
      if (TORUS) return (dc <= COLS / 2) ? P_EAST : P_WEST;
      else       return (dstc > c) ? P_EAST : P_WEST;
    end else if (dstr != r) begin
      if (TORUS) return (dr <= ROWS / 2) ? P_SOUTH : P_NORTH;
      else       return (dstr > r) ? P_SOUTH : P_NORTH;
    end
    return P_LOCAL;
  endfunction

  port_e want [NPORTS];
  for (genvar p = 0; p < NPORTS; p++) begin : g_route
    assign want[p] = route(h_msg[p].meta, my_row, my_col);
  end

  // ---------------------------------------------------- arbitration
  logic [2:0]        last [NPORTS];   // last input granted, per output
  logic [NPORTS-1:0] grant [NPORTS];  // grant[o][i]
  logic [NPORTS-1:0] held [NPORTS];   // grant kept while the output stalls
  logic [NPORTS-1:0] hold_v;

  always_comb begin
    for (int o = 0; o < NPORTS; o++) begin
      logic found;
      grant[o] = '0;
      found    = hold_v[o];
      if (hold_v[o]) grant[o] = held[o];
      for (int k = 1; k <= NPORTS; k++) begin
        int i;
        i = (int'(last[o]) + k) % NPORTS;
        if (!found && h_valid[i] && want[i] == port_e'(o)) begin
          grant[o][i] = 1'b1;
          found       = 1'b1;
        end
      end
    end
  end

  always_comb begin
    h_pop = '0;
    for (int o = 0; o < NPORTS; o++) begin
      out_valid[o] = |grant[o];
      out_msg[o]   = '0;
      for (int i = 0; i < NPORTS; i++) begin
        if (grant[o][i]) begin
          out_msg[o] = h_msg[i];
          h_pop[i]   = out_ready[o];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NPORTS; o++) begin
        last[o] <= 3'(NPORTS - 1);
        held[o] <= '0;
      end
      hold_v <= '0;
    end else begin
      for (int o = 0; o < NPORTS; o++) begin
        hold_v[o] <= out_valid[o] && !out_ready[o];
        held[o]   <= grant[o];
        for (int i = 0; i < NPORTS; i++) begin
          if (grant[o][i] && out_ready[o]) last[o] <= 3'(i);
        end
      end
    end
  end

  // An offered flit stays offered until it is taken (per output port).
  for (genvar o = 0; o < NPORTS; o++) begin : g_chk
    a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             out_valid[o] && !out_ready[o] |=> out_valid[o] && $stable(out_msg[o]));
  end
endmodule
