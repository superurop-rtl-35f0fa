// azul_input_fsm: the network-input controller of a tile.
//
// Two states. In IDLE, while the core is not busy, the FSM takes the message
// at the head of the input queue and acts on its type:
//   WRITE_IMEM  store data at instruction-memory byte address addr
//   WRITE_DMEM  store data at data-memory byte address addr
//   WRITE_LUT   set task table entry addr[3:0] to data[15:0]
//   START_TASK  read task table entry addr[3:0] and start the core there;
//               go to RUN
//   other       drop the message
// Each message takes one cycle. In RUN the FSM hands the input queue to the
// core, whose recv instructions consume messages; once the task returns and
// the core's pipeline has drained (busy low) it goes back to IDLE.
//
// Timing: the write enables and the start pulse are combinational from the
// queue head and act on the same clock edge that pops it. The write address,
// write data and the message passed to recv are wires from the queue head
// (only the enables decide whether they are used), so these outputs carry no
// logic of their own.
//
// This follows the paper's task-execution loop: program and data loading and
// task starts all arrive as network messages, and a task start is looked up
// in the 16-entry task table. Giving the queue to the core while a task runs,
// and dropping unknown types, are this design's own choices.
module azul_input_fsm
  import azul_pkg::*;
#(
  parameter int unsigned IMEM_WORDS = 16384,
  parameter int unsigned DMEM_WORDS = 16384
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // input queue head
  input  logic                          q_valid,
  output logic                          q_ready,
  input  msg_t                          q_msg,
  // core
  input  logic                          core_busy,
  output logic                          core_start,
  output logic [ADDR_W-1:0]             core_start_pc,
  output logic                          core_rx_valid,
  input  logic                          core_rx_ready,
  // memory write ports
  output logic                          imem_we,
  output logic [$clog2(IMEM_WORDS)-1:0] imem_waddr,
  output logic                          dmem_we,
  output logic [$clog2(DMEM_WORDS)-1:0] dmem_waddr,
  output logic [XLEN-1:0]               wdata,
  output logic                          lut_we,
  output logic [$clog2(NTASKS)-1:0]     lut_addr,
  input  logic [ADDR_W-1:0]             lut_rdata,
  output logic                          running
);
  typedef enum logic { S_IDLE, S_RUN } state_e;
  state_e state;

  logic take;
  assign take = (state == S_IDLE) && q_valid && !core_busy;

  assign q_ready       = (state == S_RUN) ? core_rx_ready : take;
  assign core_rx_valid = (state == S_RUN) && q_valid;
  assign running       = (state == S_RUN);

  assign wdata         = q_msg.data;
  assign imem_waddr    = q_msg.meta.addr[$clog2(IMEM_WORDS)+1:2];
  assign dmem_waddr    = q_msg.meta.addr[$clog2(DMEM_WORDS)+1:2];
  assign lut_addr      = q_msg.meta.addr[$clog2(NTASKS)-1:0];
  assign imem_we       = take && q_msg.meta.ttype == T_WRITE_IMEM;
  assign dmem_we       = take && q_msg.meta.ttype == T_WRITE_DMEM;
  assign lut_we        = take && q_msg.meta.ttype == T_WRITE_LUT;
  assign core_start    = take && q_msg.meta.ttype == T_START_TASK;
  assign core_start_pc = lut_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
    end else begin
      unique case (state)
        S_IDLE:  if (core_start) state <= S_RUN;
        default: if (!core_busy) state <= S_IDLE;
      endcase
    end
  end
endmodule
