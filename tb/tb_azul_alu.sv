// tb_azul_alu: self-checking test of the integer ALU.
//
// Random and corner operands for every operation; expected values come from
// independent formulations (shifts by repeated single-bit steps, signed
// compares from sign bits and an unsigned compare).
module tb_azul_alu;
  import azul_pkg::*;
  alu_op_e op;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;
  logic clk = 1'b0;

  azul_alu dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] ref_y(alu_op_e o, logic [31:0] x, logic [31:0] z);
    logic [31:0] r;
    int sh;
    sh = z[4:0];
    case (o)
      ALU_ADD:  return x + z;
      ALU_SUB:  return x + ~z + 1;
      ALU_SLL:  begin r = x; repeat (sh) r = {r[30:0], 1'b0}; return r; end
      ALU_SRL:  begin r = x; repeat (sh) r = {1'b0, r[31:1]}; return r; end
      ALU_SRA:  begin r = x; repeat (sh) r = {r[31], r[31:1]}; return r; end
      ALU_SLT:  return (x[31] != z[31]) ? {31'd0, x[31]} : {31'd0, x < z};
      ALU_SLTU: return {31'd0, x < z};
      ALU_XOR:  return (x | z) & ~(x & z);
      ALU_OR:   return ~(~x & ~z);
      ALU_AND:  return ~(~x | ~z);
      ALU_PASSB: return z;
      default:  return 0;
    endcase
  endfunction

  initial begin
    logic [31:0] corners [6] = '{32'h0, 32'h1, 32'hffff_ffff, 32'h8000_0000, 32'h7fff_ffff, 32'h1f};
    for (int i = 0; i < 4000; i++) begin
      op = alu_op_e'(i % 11);
      a = (i % 7 == 0) ? corners[$urandom % 6] : $urandom;
      b = (i % 5 == 0) ? corners[$urandom % 6] : $urandom;
      #1;
      checks++;
      if (y !== ref_y(op, a, b)) begin
        failures++;
        $display("FAIL op=%0d a=%h b=%h y=%h exp=%h", op, a, b, y, ref_y(op, a, b));
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
