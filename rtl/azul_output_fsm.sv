// azul_output_fsm: hands the core's send messages to the output queue.
//
// A two-state machine (EMPTY, HOLD) with a one-message holding register.
// The core's send presents a 64-bit message on tx_*; the FSM captures it
// into the register and offers it to the output queue on q_*. tx_ready is
// high while the register is empty or is being emptied in this cycle, so
// back-to-back sends flow at one message per cycle and the core stalls only
// once the queue is full. The register breaks the path from the queue's
// state to the core's execute stage into one registered stage.
//
// The paper names the Output FSM between the core and the output queue; its
// behaviour here is this design's own.
module azul_output_fsm
  import azul_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic tx_valid,
  output logic tx_ready,
  input  msg_t tx_msg,
  output logic q_valid,
  input  logic q_ready,
  output msg_t q_msg
);
  typedef enum logic { S_EMPTY, S_HOLD } state_e;
  state_e state;
  msg_t   hold;

  assign q_valid  = (state == S_HOLD);
  assign q_msg    = hold;
  assign tx_ready = (state == S_EMPTY) || q_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_EMPTY;
      hold  <= '0;
    end else begin
      if (tx_valid && tx_ready) begin
        hold  <= tx_msg;
        state <= S_HOLD;
      end else if (q_valid && q_ready) begin
        state <= S_EMPTY;
      end
    end
  end
endmodule
