// tb_azul_fmac: self-checking test of the floating-point multiply/add unit.
//
// Random binary32 operands with exponents kept in the normal range are
// converted exactly to double precision; the exact product or sum is
// computed in double, and the unit's result must lie within one unit in the
// last place of it and not above it in magnitude (round toward zero).
// Directed cases cover zeros, infinities, NaN, exact cancellation,
// overflow to the largest finite number and flush-to-zero.
module tb_azul_fmac;
  import azul_pkg::*;
  fp_op_e op;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;
  logic clk = 1'b0;

  azul_fmac dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real f2r(logic [31:0] f);
    if (f[30:23] == 0) return 0.0;
    return $bitstoreal({f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0});
  endfunction

  function automatic logic [31:0] rnd(int emin, int emax);
    return {1'($urandom), 8'(emin + ($urandom % (emax - emin + 1))), 23'($urandom)};
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(fp_op_e o, logic [31:0] x, logic [31:0] z);
    real ex, got, tol, ax, ag;
    op = o; a = x; b = z;
    #1;
    ex  = (o == FP_MUL) ? f2r(x) * f2r(z) : f2r(x) + f2r(z);
    got = f2r(y);
    ax  = ex < 0 ? -ex : ex;
    ag  = got < 0 ? -got : got;
    tol = ax / 4194304.0;  // 2^-22 of the value, at least one ulp
    check((ag <= ax * (1.0 + 1e-15)) && (ax - ag <= tol) && (ex == 0.0 || (got < 0) == (ex < 0)),
          $sformatf("op=%0d a=%h b=%h y=%h got=%g exp=%g", o, x, z, y, got, ex));
    @(posedge clk);
  endtask

  task automatic exact(fp_op_e o, logic [31:0] x, logic [31:0] z, logic [31:0] e);
    op = o; a = x; b = z;
    #1;
    check(y == e, $sformatf("directed op=%0d a=%h b=%h y=%h exp=%h", o, x, z, y, e));
    @(posedge clk);
  endtask

  initial begin
    // random, normal range
    for (int i = 0; i < 3000; i++) run(FP_MUL, rnd(90, 160), rnd(90, 160));
    for (int i = 0; i < 3000; i++) run(FP_ADD, rnd(100, 150), rnd(100, 150));
    // close exponents with opposite signs (cancellation)
    for (int i = 0; i < 1000; i++) begin
      logic [31:0] x, z;
      x = rnd(120, 130);
      z = {~x[31], x[30:23] - 8'($urandom % 2), 23'($urandom)};
      run(FP_ADD, x, z);
    end
    // directed
    exact(FP_MUL, 32'h3fc0_0000, 32'h4000_0000, 32'h4040_0000);  // 1.5 * 2 = 3
    exact(FP_MUL, 32'hbf80_0000, 32'h4080_0000, 32'hc080_0000);  // -1 * 4 = -4
    exact(FP_ADD, 32'h3f80_0000, 32'h3f80_0000, 32'h4000_0000);  // 1 + 1 = 2
    exact(FP_ADD, 32'h4040_0000, 32'hbf80_0000, 32'h4000_0000);  // 3 - 1 = 2
    exact(FP_ADD, 32'h4120_0000, 32'hc120_0000, 32'h0000_0000);  // 10 - 10 = 0
    exact(FP_MUL, 32'h4120_0000, 32'h0000_0000, 32'h0000_0000);  // 10 * 0
    exact(FP_ADD, 32'h0000_0000, 32'h4120_0000, 32'h4120_0000);  // 0 + 10
    exact(FP_MUL, 32'h7f80_0000, 32'h4000_0000, 32'h7f80_0000);  // inf * 2
    exact(FP_MUL, 32'h7f80_0000, 32'h0000_0000, 32'h7fc0_0000);  // inf * 0
    exact(FP_ADD, 32'h7f80_0000, 32'hff80_0000, 32'h7fc0_0000);  // inf - inf
    exact(FP_ADD, 32'h7fc0_0000, 32'h3f80_0000, 32'h7fc0_0000);  // NaN + 1
    exact(FP_MUL, 32'h7f00_0000, 32'h7f00_0000, 32'h7f7f_ffff);  // overflow
    exact(FP_MUL, 32'h0100_0000, 32'h0100_0000, 32'h0000_0000);  // underflow
    exact(FP_ADD, 32'h3f80_0000, 32'h3380_0000, 32'h3f80_0000);  // 1 + 2^-24 truncates
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
