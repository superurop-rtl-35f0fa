// azul_regfile: the 32 x 32-bit RISC-V integer register file of a PE.
//
// Two asynchronous read ports and two write ports. Register x0 always reads
// zero and ignores writes. A read of a register that a write port is writing
// in the same cycle returns the new value (write-through), so the pipeline's
// decode stage needs no bypass from writeback. If both write ports name the
// same register, port B wins. Registers reset to zero.
//
// Following the paper: 32 registers of 32 bits. This design's own choice:
// the second write port, which the recv instruction uses to write the
// metadata and the data word of a message in one writeback.
module azul_regfile #(
  parameter int unsigned NREGS = 32,
  parameter int unsigned XLEN  = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [$clog2(NREGS)-1:0] ra1,
  output logic [XLEN-1:0]          rd1,
  input  logic [$clog2(NREGS)-1:0] ra2,
  output logic [XLEN-1:0]          rd2,
  input  logic                     wea,
  input  logic [$clog2(NREGS)-1:0] waa,
  input  logic [XLEN-1:0]          wda,
  input  logic                     web,
  input  logic [$clog2(NREGS)-1:0] wab,
  input  logic [XLEN-1:0]          wdb
);
  logic [XLEN-1:0] regs [NREGS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
    end else begin
      if (wea && waa != '0) regs[waa] <= wda;
      if (web && wab != '0) regs[wab] <= wdb;
    end
  end

  function automatic logic [XLEN-1:0] rd(input logic [$clog2(NREGS)-1:0] a,
                                         input logic [XLEN-1:0] stored);
    if (a == '0)             return '0;
    else if (web && wab == a) return wdb;
    else if (wea && waa == a) return wda;
    else                      return stored;
  endfunction

  assign rd1 = rd(ra1, regs[ra1]);
  assign rd2 = rd(ra2, regs[ra2]);
endmodule
