// azul_pkg: types and constants shared by every block of the Azul tile grid.
//
// A network message is 64 bits: a 32-bit metadata word and a 32-bit data word.
// The metadata word carries the destination tile (6-bit row, 6-bit column),
// a 4-bit task type and a 16-bit address, at bit offsets 0, 6, 12 and 16 as
// the published metadata format gives them. The 6-bit row/column fields cap
// the grid at 64 x 64 tiles.
//
// Following the paper: field widths and positions, the four kinds of message
// (instruction-memory write, data-memory write, lookup-table write, task
// start), 64 KB instruction and data memories with 16-bit byte addresses, a
// 16-entry task table, 32 registers. This design's own choices: the numeric
// codes of the task types and the opcode encodings of send and recv.
package azul_pkg;

  localparam int unsigned XLEN     = 32;
  localparam int unsigned ROW_W    = 6;
  localparam int unsigned COL_W    = 6;
  localparam int unsigned TYPE_W   = 4;
  localparam int unsigned ADDR_W   = 16;
  localparam int unsigned MSG_W    = 64;
  localparam int unsigned NTASKS   = 16;
  localparam int unsigned NREGS    = 32;
  localparam int unsigned MEM_WORDS = 16384;  // 64 KB of 32-bit words

  // Task type field of the metadata word.
  typedef enum logic [TYPE_W-1:0] {
    T_WRITE_IMEM = 4'd0,
    T_WRITE_DMEM = 4'd1,
    T_WRITE_LUT  = 4'd2,
    T_START_TASK = 4'd3
  } task_type_e;

  // Metadata word: bit 0 is the least significant bit, so the struct lists
  // the fields from the most significant one down.
  typedef struct packed {
    logic [ADDR_W-1:0] addr;   // [31:16]
    logic [TYPE_W-1:0] ttype;  // [15:12]
    logic [COL_W-1:0]  col;    // [11:6]
    logic [ROW_W-1:0]  row;    // [5:0]
  } meta_t;

  typedef struct packed {
    meta_t             meta;   // [63:32]
    logic [XLEN-1:0]   data;   // [31:0]
  } msg_t;

  // Router port numbering.
  typedef enum logic [2:0] {
    P_LOCAL = 3'd0,
    P_NORTH = 3'd1,
    P_EAST  = 3'd2,
    P_SOUTH = 3'd3,
    P_WEST  = 3'd4
  } port_e;
  localparam int unsigned NPORTS = 5;

  // RISC-V major opcodes used by the core.
  localparam logic [6:0] OPC_LUI    = 7'b0110111;
  localparam logic [6:0] OPC_AUIPC  = 7'b0010111;
  localparam logic [6:0] OPC_JAL    = 7'b1101111;
  localparam logic [6:0] OPC_JALR   = 7'b1100111;
  localparam logic [6:0] OPC_BRANCH = 7'b1100011;
  localparam logic [6:0] OPC_LOAD   = 7'b0000011;
  localparam logic [6:0] OPC_STORE  = 7'b0100011;
  localparam logic [6:0] OPC_OPIMM  = 7'b0010011;
  localparam logic [6:0] OPC_OP     = 7'b0110011;
  localparam logic [6:0] OPC_OPFP   = 7'b1010011;
  localparam logic [6:0] OPC_NET    = 7'b0001011;  // custom-0: send / recv
  localparam logic [2:0] F3_SEND    = 3'd0;
  localparam logic [2:0] F3_RECV    = 3'd1;
  localparam logic [6:0] F7_FADD    = 7'b0000000;
  localparam logic [6:0] F7_FMUL    = 7'b0001000;

  // ALU operations.
  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_SLL, ALU_SLT, ALU_SLTU,
    ALU_XOR, ALU_SRL, ALU_SRA, ALU_OR, ALU_AND, ALU_PASSB
  } alu_op_e;

  typedef enum logic [0:0] { FP_ADD = 1'b0, FP_MUL = 1'b1 } fp_op_e;

endpackage
