// azul_task_lut: the task lookup table of a PE.
//
// Sixteen entries, each the 16-bit start address (byte address in
// instruction memory) of one task. A START_TASK message names a task by its
// 4-bit identifier; the table turns that into the program counter at which
// the core starts. Written by WRITE_LUT messages (we, waddr, wdata); read
// asynchronously, as a LUT RAM would be. Entries reset to zero.
//
// Following the paper: 16 tasks, 16-bit start addresses, mapping task
// identifier to start address. This design's own choice: reset to zero.
module azul_task_lut #(
  parameter int unsigned NTASKS = 16,
  parameter int unsigned PC_W   = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      we,
  input  logic [$clog2(NTASKS)-1:0] waddr,
  input  logic [PC_W-1:0]           wdata,
  input  logic [$clog2(NTASKS)-1:0] raddr,
  output logic [PC_W-1:0]           rdata
);
  logic [PC_W-1:0] table_q [NTASKS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NTASKS; i++) table_q[i] <= '0;
    end else if (we) begin
      table_q[waddr] <= wdata;
    end
  end

  assign rdata = table_q[raddr];
endmodule
