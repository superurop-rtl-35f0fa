// azul_alu: the integer ALU of the PE core (RV32I base operations).
//
// Purely combinational: y = a <op> b for add, subtract, shifts (by b[4:0]),
// signed and unsigned set-less-than, xor, or, and, and pass-b (for LUI).
// The core also uses the adder for load/store and jump address arithmetic.
//
// Following the paper: a simple ALU for additions and memory addressing in a
// standard 32-bit RISC-V core. The operation list is the RV32I base set.
module azul_alu
  import azul_pkg::*;
(
  input  alu_op_e         op,
  input  logic [XLEN-1:0] a,
  input  logic [XLEN-1:0] b,
  output logic [XLEN-1:0] y
);
  always_comb begin
    unique case (op)
      ALU_ADD:   y = a + b;
      ALU_SUB:   y = a - b;
      ALU_SLL:   y = a << b[4:0];
      ALU_SLT:   y = {31'd0, $signed(a) < $signed(b)};
      ALU_SLTU:  y = {31'd0, a < b};
      ALU_XOR:   y = a ^ b;
      ALU_SRL:   y = a >> b[4:0];
      ALU_SRA:   y = $unsigned($signed(a) >>> b[4:0]);
      ALU_OR:    y = a | b;
      ALU_AND:   y = a & b;
      ALU_PASSB: y = b;
      default:   y = '0;
    endcase
  end
endmodule
