// azul_sram: one-read, one-write synchronous scratchpad memory with byte
// enables.
//
// Each tile has two of these: the 64 KB instruction memory and the 64 KB data
// memory (16384 words of 32 bits each, addressed by word). A write with
// we=1 stores the bytes of wdata selected by wbe at waddr on the clock edge.
// A read with re=1 returns mem[raddr] on rdata in the next cycle; with re=0
// rdata keeps its last value, which lets a stalled pipeline hold the word it
// fetched. Reading and writing the same word in one cycle returns the old
// word. The contents are not reset: they are loaded over the network.
//
// Following the paper: the sizes and single-cycle access. This design's own
// choices: a simple dual-port organisation and read-during-write behaviour.
module azul_sram #(
  parameter int unsigned WORDS = 16384,
  parameter int unsigned WIDTH = 32
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(WORDS)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic [WIDTH/8-1:0]       wbe,
  input  logic                     re,
  input  logic [$clog2(WORDS)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int b = 0; b < WIDTH / 8; b++) begin
        if (wbe[b]) mem[waddr][b*8 +: 8] <= wdata[b*8 +: 8];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end
endmodule
