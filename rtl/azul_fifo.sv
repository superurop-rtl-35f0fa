// azul_fifo: synchronous first-in first-out queue with valid/ready handshakes.
//
// Used as the tile's network input queue and output queue. The write side
// accepts a word when in_valid && in_ready (in_ready = not full); the read
// side presents the oldest word on out_data with out_valid = not empty, and
// drops it when out_valid && out_ready. A word written in one cycle can be
// read in the next; there is no same-cycle fall-through. Push and pop may
// happen in the same cycle. in_ready depends only on the queue's own state,
// never combinationally on out_ready, so chains of queues form no loops.
//
// The paper places the network queues in single-cycle block RAM but gives no
// depth; the default depth of 16 is this design's choice.
module azul_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    rd_ptr, wr_ptr;
  logic             push, pop;

  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rd_ptr];

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= next_ptr(wr_ptr);
      if (pop)  rd_ptr <= next_ptr(rd_ptr);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  // The queue never goes past its bounds.
  a_bounds: assert property (@(posedge clk) disable iff (!rst_n) 32'(count) <= DEPTH);
endmodule
