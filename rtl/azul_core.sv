// azul_core: the processing element (PE) of an Azul tile, a five-stage
// pipelined RV32I core with a floating-point unit and two network
// instructions.
//
// Stages: F (the PC addresses instruction memory), D (the fetched word
// arrives from the synchronous memory, is decoded, and the register file is
// read), E (ALU, floating-point unit, branch resolution, data-memory address
// and store, send/recv), M (load data arrives from the synchronous data
// memory) and W (register writeback). Results are forwarded from M and W to
// the operands of E, and the register file writes through to D, so there are
// no data stalls, loads included. Taken branches and jumps resolve in E and
// squash the two younger instructions.
//
// Network instructions (custom-0 opcode, R-type):
//   send rs1, rs2 (funct3 0): send the 64-bit message {metadata=rs1, data=rs2}
//     on tx_*; E stalls while tx_ready is low.
//   recv rd, rs2 (funct3 1): take the message at the head of the input queue
//     on rx_*; writes its metadata to rd and its data to the register named by
//     the rs2 field; E stalls while rx_valid is low.
// Floating point (OP-FP opcode): fadd.s (funct7 0000000) and fmul.s (funct7
// 0001000) read and write the integer registers.
//
// Tasks: the core idles until start is pulsed (only while busy is low); it
// then sets x1 (ra) to 0 and begins fetching at start_pc. Any jump or taken
// branch to address 0 ends the task: fetching stops, the pipeline drains and
// busy falls. A task written as a function therefore returns to idle with a
// plain ret.
//
// Memory interface: imem/dmem are word addressed (byte address bits 15:2),
// with one cycle of read latency; only the low 16 bits of a load or store
// address are used. Loads and stores of bytes, halfwords and words are
// supported; misaligned accesses are not detected.
//
// Following the paper: the five stages, one ALU and one floating-point unit,
// single-cycle SRAM, send/recv with a metadata and a data register, the
// return-to-pc-0 idle rule. This design's own choices: the instruction
// encodings, forwarding and squash policy, and how a task end is detected.
module azul_core
  import azul_pkg::*;
#(
  parameter int unsigned IMEM_WORDS = 16384,
  parameter int unsigned DMEM_WORDS = 16384
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // task control
  input  logic                          start,
  input  logic [ADDR_W-1:0]             start_pc,
  output logic                          busy,
  // instruction memory read port
  output logic                          imem_re,
  output logic [$clog2(IMEM_WORDS)-1:0] imem_raddr,
  input  logic [XLEN-1:0]               imem_rdata,
  // data memory
  output logic                          dmem_re,
  output logic [$clog2(DMEM_WORDS)-1:0] dmem_raddr,
  input  logic [XLEN-1:0]               dmem_rdata,
  output logic                          dmem_we,
  output logic [$clog2(DMEM_WORDS)-1:0] dmem_waddr,
  output logic [XLEN-1:0]               dmem_wdata,
  output logic [XLEN/8-1:0]             dmem_wbe,
  // network
  input  logic                          rx_valid,
  output logic                          rx_ready,
  input  msg_t                          rx_msg,
  output logic                          tx_valid,
  input  logic                          tx_ready,
  output msg_t                          tx_msg
);
  typedef enum logic [1:0] { SRC_RS1, SRC_PC, SRC_ZERO } srca_e;

  typedef struct packed {
    alu_op_e     alu_op;
    srca_e       srca;
    logic        srcb_imm;
    logic        is_branch;
    logic        is_jal;
    logic        is_jalr;
    logic        is_load;
    logic        is_store;
    logic        is_fp;
    fp_op_e      fp_op;
    logic        is_send;
    logic        is_recv;
    logic        wen;
    logic [2:0]  f3;
    logic [4:0]  rd;
    logic [4:0]  rd2;
    logic [4:0]  rs1;
    logic [4:0]  rs2;
    logic [31:0] imm;
  } ctrl_t;

  // ------------------------------------------------------------------ state
  logic        running;
  logic [31:0] pc_f;
  logic        valid_d;
  logic [31:0] pc_d;
  logic        valid_e;
  logic [31:0] pc_e;
  ctrl_t       c_e;
  logic [31:0] op1_e, op2_e;
  logic        valid_m, wen_m, wen2_m, load_m;
  logic [4:0]  rd_m, rd2_m;
  logic [31:0] res_m, res2_m;
  logic [2:0]  f3_m;
  logic [1:0]  alo_m;
  logic        valid_w, wen_w, wen2_w;
  logic [4:0]  rd_w, rd2_w;
  logic [31:0] res_w, res2_w;

  logic        stall, redirect;
  logic [31:0] target;

  // ------------------------------------------------------------------ fetch
  assign imem_re    = running && !stall;
  assign imem_raddr = pc_f[$clog2(IMEM_WORDS)+1:2];

  // ----------------------------------------------------------------- decode
  ctrl_t       c_d;
  logic [31:0] instr_d;
  assign instr_d = imem_rdata;

  always_comb begin
    logic [6:0] opc;
    logic [2:0] f3;
    logic [6:0] f7;
    opc = instr_d[6:0];
    f3  = instr_d[14:12];
    f7  = instr_d[31:25];
    c_d = '0;
    c_d.alu_op = ALU_ADD;
    c_d.srca   = SRC_RS1;
    c_d.fp_op  = FP_ADD;
    c_d.f3     = f3;
    c_d.rd     = instr_d[11:7];
    c_d.rs1    = instr_d[19:15];
    c_d.rs2    = instr_d[24:20];
    c_d.rd2    = instr_d[24:20];
    unique case (opc)
      OPC_LUI: begin
        c_d.imm = {instr_d[31:12], 12'd0};
        c_d.srca = SRC_ZERO; c_d.srcb_imm = 1'b1; c_d.wen = 1'b1;
      end
      OPC_AUIPC: begin
        c_d.imm = {instr_d[31:12], 12'd0};
        c_d.srca = SRC_PC; c_d.srcb_imm = 1'b1; c_d.wen = 1'b1;
      end
      OPC_JAL: begin
        c_d.imm = {{12{instr_d[31]}}, instr_d[19:12], instr_d[20], instr_d[30:21], 1'b0};
        c_d.is_jal = 1'b1; c_d.wen = 1'b1;
      end
      OPC_JALR: begin
        c_d.imm = {{20{instr_d[31]}}, instr_d[31:20]};
        c_d.is_jalr = 1'b1; c_d.wen = 1'b1;
      end
      OPC_BRANCH: begin
        c_d.imm = {{20{instr_d[31]}}, instr_d[7], instr_d[30:25], instr_d[11:8], 1'b0};
        c_d.is_branch = 1'b1;
      end
      OPC_LOAD: begin
        c_d.imm = {{20{instr_d[31]}}, instr_d[31:20]};
        c_d.srcb_imm = 1'b1; c_d.is_load = 1'b1; c_d.wen = 1'b1;
      end
      OPC_STORE: begin
        c_d.imm = {{20{instr_d[31]}}, instr_d[31:25], instr_d[11:7]};
        c_d.srcb_imm = 1'b1; c_d.is_store = 1'b1;
      end
      OPC_OPIMM, OPC_OP: begin
        c_d.imm = {{20{instr_d[31]}}, instr_d[31:20]};
        c_d.srcb_imm = (opc == OPC_OPIMM);
        c_d.wen = 1'b1;
        unique case (f3)
          3'd0: c_d.alu_op = (opc == OPC_OP && f7[5]) ? ALU_SUB : ALU_ADD;
          3'd1: c_d.alu_op = ALU_SLL;
          3'd2: c_d.alu_op = ALU_SLT;
          3'd3: c_d.alu_op = ALU_SLTU;
          3'd4: c_d.alu_op = ALU_XOR;
          3'd5: c_d.alu_op = f7[5] ? ALU_SRA : ALU_SRL;
          3'd6: c_d.alu_op = ALU_OR;
          default: c_d.alu_op = ALU_AND;
        endcase
      end
      OPC_OPFP: begin
        if (f7 == F7_FADD || f7 == F7_FMUL) begin
          c_d.is_fp = 1'b1; c_d.wen = 1'b1;
          c_d.fp_op = (f7 == F7_FMUL) ? FP_MUL : FP_ADD;
        end
      end
      OPC_NET: begin
        if (f3 == F3_SEND) c_d.is_send = 1'b1;
        if (f3 == F3_RECV) begin c_d.is_recv = 1'b1; c_d.wen = 1'b1; end
      end
      default: ;  // unknown opcodes execute as no-ops
    endcase
  end

  logic [31:0] rf_rd1, rf_rd2;
  logic        rf_wea, rf_web;
  logic [4:0]  rf_waa, rf_wab;
  logic [31:0] rf_wda, rf_wdb;

  // Writeback uses both ports; a task start clears ra through port A while
  // the pipeline is empty.
  assign rf_wea = (valid_w && wen_w) || start;
  assign rf_waa = start ? 5'd1 : rd_w;
  assign rf_wda = start ? 32'd0 : res_w;
  assign rf_web = valid_w && wen2_w;
  assign rf_wab = rd2_w;
  assign rf_wdb = res2_w;

  azul_regfile #(.NREGS(NREGS), .XLEN(XLEN)) u_rf (
    .clk, .rst_n,
    .ra1(c_d.rs1), .rd1(rf_rd1),
    .ra2(c_d.rs2), .rd2(rf_rd2),
    .wea(rf_wea), .waa(rf_waa), .wda(rf_wda),
    .web(rf_web), .wab(rf_wab), .wdb(rf_wdb)
  );

  // ---------------------------------------------------------------- execute
  logic [31:0] ld_data_m;   // load result available in M
  logic [31:0] res_mfinal;

  function automatic logic [31:0] fwd(input logic [4:0] r, input logic [31:0] held);
    if (r == 5'd0)                               return 32'd0;
    else if (valid_m && wen2_m && rd2_m == r)    return res2_m;
    else if (valid_m && wen_m && rd_m == r)      return res_mfinal;
    else if (valid_w && wen2_w && rd2_w == r)    return res2_w;
    else if (valid_w && wen_w && rd_w == r)      return res_w;
    else                                         return held;
  endfunction

  logic [31:0] a_e, b_e, srca_v, srcb_v, alu_y, fp_y, res_e, addr_e;
  logic        taken;

  assign a_e = fwd(c_e.rs1, op1_e);
  assign b_e = fwd(c_e.rs2, op2_e);

  always_comb begin
    unique case (c_e.srca)
      SRC_PC:   srca_v = pc_e;
      SRC_ZERO: srca_v = 32'd0;
      default:  srca_v = a_e;
    endcase
  end
  assign srcb_v = c_e.srcb_imm ? c_e.imm : b_e;

  azul_alu u_alu (.op(c_e.alu_op), .a(srca_v), .b(srcb_v), .y(alu_y));
  azul_fmac u_fmac (.op(c_e.fp_op), .a(a_e), .b(b_e), .y(fp_y));

  always_comb begin
    unique case (c_e.f3)
      3'd0:    taken = (a_e == b_e);
      3'd1:    taken = (a_e != b_e);
      3'd4:    taken = ($signed(a_e) < $signed(b_e));
      3'd5:    taken = ($signed(a_e) >= $signed(b_e));
      3'd6:    taken = (a_e < b_e);
      3'd7:    taken = (a_e >= b_e);
      default: taken = 1'b0;
    endcase
  end

  assign addr_e   = a_e + c_e.imm;
  assign target   = c_e.is_jalr ? {addr_e[31:1], 1'b0} : pc_e + c_e.imm;
  assign redirect = valid_e && (c_e.is_jal || c_e.is_jalr || (c_e.is_branch && taken));

  always_comb begin
    if (c_e.is_jal || c_e.is_jalr) res_e = pc_e + 32'd4;
    else if (c_e.is_fp)            res_e = fp_y;
    else if (c_e.is_recv)          res_e = rx_msg.meta;
    else                           res_e = alu_y;
  end

  // network
  assign tx_valid = valid_e && c_e.is_send;
  assign tx_msg   = '{meta: a_e, data: b_e};
  assign rx_ready = valid_e && c_e.is_recv;
  assign stall    = valid_e && ((c_e.is_send && !tx_ready) || (c_e.is_recv && !rx_valid));

  // data memory
  assign dmem_re    = valid_e && c_e.is_load;
  assign dmem_raddr = addr_e[$clog2(DMEM_WORDS)+1:2];
  assign dmem_we    = valid_e && c_e.is_store;
  assign dmem_waddr = addr_e[$clog2(DMEM_WORDS)+1:2];
  always_comb begin
    unique case (c_e.f3[1:0])
      2'd0:    begin dmem_wdata = {4{b_e[7:0]}};  dmem_wbe = 4'b0001 << addr_e[1:0]; end
      2'd1:    begin dmem_wdata = {2{b_e[15:0]}}; dmem_wbe = addr_e[1] ? 4'b1100 : 4'b0011; end
      default: begin dmem_wdata = b_e;            dmem_wbe = 4'b1111; end
    endcase
  end

  // ----------------------------------------------------------------- memory
  always_comb begin
    logic [7:0]  byt;
    logic [15:0] half;
    byt  = dmem_rdata[alo_m*8 +: 8];
    half = alo_m[1] ? dmem_rdata[31:16] : dmem_rdata[15:0];
    unique case (f3_m)
      3'd0:    ld_data_m = {{24{byt[7]}}, byt};
      3'd1:    ld_data_m = {{16{half[15]}}, half};
      3'd4:    ld_data_m = {24'd0, byt};
      3'd5:    ld_data_m = {16'd0, half};
      default: ld_data_m = dmem_rdata;
    endcase
  end
  assign res_mfinal = load_m ? ld_data_m : res_m;

  // -------------------------------------------------------------- registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      pc_f    <= '0;
      valid_d <= 1'b0;
      pc_d    <= '0;
      valid_e <= 1'b0;
      pc_e    <= '0;
      c_e     <= '0;
      op1_e   <= '0;
      op2_e   <= '0;
      valid_m <= 1'b0; wen_m <= 1'b0; wen2_m <= 1'b0; load_m <= 1'b0;
      rd_m    <= '0;   rd2_m <= '0;   res_m  <= '0;   res2_m <= '0;
      f3_m    <= '0;   alo_m <= '0;
      valid_w <= 1'b0; wen_w <= 1'b0; wen2_w <= 1'b0;
      rd_w    <= '0;   rd2_w <= '0;   res_w  <= '0;   res2_w <= '0;
    end else begin
      // F
      if (start && !busy) begin
        running <= 1'b1;
        pc_f    <= 32'(start_pc);
      end else if (redirect) begin
        pc_f <= target;
        if (target == 32'd0) running <= 1'b0;   // task returned: idle
      end else if (imem_re) begin
        pc_f <= pc_f + 32'd4;
      end
      // F -> D
      if (redirect)      valid_d <= 1'b0;
      else if (!stall) begin
        valid_d <= imem_re;
        pc_d    <= pc_f;
      end
      // D -> E
      if (!stall) begin
        valid_e <= valid_d && !redirect;
        pc_e    <= pc_d;
        c_e     <= c_d;
        op1_e   <= rf_rd1;
        op2_e   <= rf_rd2;
      end else begin
        // keep the held operands current while the producers retire
        op1_e <= a_e;
        op2_e <= b_e;
      end
      // E -> M
      valid_m <= valid_e && !stall;
      wen_m   <= c_e.wen;
      wen2_m  <= c_e.is_recv;
      load_m  <= c_e.is_load;
      rd_m    <= c_e.rd;
      rd2_m   <= c_e.rd2;
      res_m   <= res_e;
      res2_m  <= rx_msg.data;
      f3_m    <= c_e.f3;
      alo_m   <= addr_e[1:0];
      // M -> W
      valid_w <= valid_m;
      wen_w   <= wen_m;
      wen2_w  <= wen2_m;
      rd_w    <= rd_m;
      rd2_w   <= rd2_m;
      res_w   <= res_mfinal;
      res2_w  <= res2_m;
    end
  end

  assign busy = running || valid_d || valid_e || valid_m || valid_w;

  // A task may only be started while the core is idle.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
  // send and recv hold their request until it is taken.
  a_tx_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              tx_valid && !tx_ready |=> tx_valid && $stable(tx_msg));
endmodule
