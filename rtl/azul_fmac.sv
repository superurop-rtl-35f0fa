// azul_fmac: single-precision floating-point multiply and add unit of a PE.
//
// Combinational, one cycle: y = a * b (op = FP_MUL) or y = a + b
// (op = FP_ADD) on IEEE-754 binary32 bit patterns held in the integer
// registers. A sparse dot product step y += M_ij * v_j is one fmul.s and one
// fadd.s.
//
// Multiply: the 24 x 24-bit significand product is normalised by at most one
// place and truncated. Add: the smaller operand is aligned with guard, round
// and sticky bits, the significands are added or subtracted, the result is
// normalised with a leading-zero count and truncated. Results are rounded
// toward zero (an overflow gives the largest finite number), subnormal inputs
// and results are flushed to zero, NaN results are the canonical quiet NaN,
// and no exception flags are kept.
//
// Following the paper: a floating-point unit beside the ALU (the text speaks
// of a multiplier, the block diagram of an FMAC). This design's own choices:
// the add operation, the rounding mode and the subnormal and NaN handling.
module azul_fmac
  import azul_pkg::*;
(
  input  fp_op_e      op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  localparam logic [31:0] QNAN = 32'h7fc0_0000;

  // ---------------- multiply ----------------
  logic [31:0] mul_y;
  always_comb begin
    logic        s;
    logic [7:0]  ea, eb;
    logic [23:0] ma, mb;
    logic [47:0] p;
    logic signed [10:0] e;
    logic [22:0] frac;
    s  = a[31] ^ b[31];
    ea = a[30:23];
    eb = b[30:23];
    ma = {1'b1, a[22:0]};
    mb = {1'b1, b[22:0]};
    p  = ma * mb;
    e  = 11'(ea) + 11'(eb) - 11'sd127;
    if (p[47]) begin
      frac = p[46:24];
      e    = e + 11'sd1;
    end else begin
      frac = p[45:23];
    end
    if ((ea == 8'hff && a[22:0] != 0) || (eb == 8'hff && b[22:0] != 0))
      mul_y = QNAN;
    else if ((ea == 8'hff && eb == 8'h00) || (eb == 8'hff && ea == 8'h00))
      mul_y = QNAN;                                // inf * 0
    else if (ea == 8'hff || eb == 8'hff)
      mul_y = {s, 8'hff, 23'd0};
    else if (ea == 8'h00 || eb == 8'h00)
      mul_y = {s, 31'd0};
    else if (e >= 11'sd255)
      mul_y = {s, 8'hfe, 23'h7fffff};             // toward zero: largest finite
    else if (e <= 11'sd0)
      mul_y = {s, 31'd0};                          // flush to zero
    else
      mul_y = {s, e[7:0], frac};
  end

  // ---------------- add ----------------
  logic [31:0] add_y;
  always_comb begin
    logic [31:0] x, z;         // |x| >= |z|
    logic [7:0]  ex, ez, d;
    logic [26:0] mx, mz, mzs;  // 1 + 23 fraction + 3 guard/round/sticky
    logic [27:0] sum;
    logic signed [10:0] e;
    logic [4:0]  lz;
    logic        found;
    logic        sticky;
    logic        a_zero, b_zero;
    sticky = 1'b0;
    a_zero = (a[30:23] == 8'h00);
    b_zero = (b[30:23] == 8'h00);
    if (a[30:0] >= b[30:0]) begin x = a; z = b; end
    else                    begin x = b; z = a; end
    ex  = x[30:23];
    ez  = z[30:23];
    d   = ex - ez;
    mx  = {1'b1, x[22:0], 3'b000};
    mz  = {1'b1, z[22:0], 3'b000};
    if (d >= 8'd27) begin
      mzs = 27'd1;                     // only the sticky bit survives
    end else begin
      mzs    = mz >> d;
      sticky = |(mz & ((27'd1 << d) - 27'd1));
      mzs[0] = mzs[0] | sticky;
    end
    e     = 11'(ex);
    sum   = '0;
    lz    = '0;
    found = 1'b0;
    if (x[31] == z[31]) begin
      sum = {1'b0, mx} + {1'b0, mzs};
      if (sum[27]) begin
        sum = {1'b0, sum[27:2], sum[1] | sum[0]};
        e   = e + 11'sd1;
      end
    end else begin
      sum = {1'b0, mx} - {1'b0, mzs};
      for (int i = 26; i >= 0; i--) begin
        if (!found && sum[i]) begin
          found = 1'b1;
          lz    = 5'(26 - i);
        end
      end
      sum = sum << lz;
      e   = e - 11'(lz);
    end
    if ((a[30:23] == 8'hff && a[22:0] != 0) || (b[30:23] == 8'hff && b[22:0] != 0))
      add_y = QNAN;
    else if (a[30:23] == 8'hff && b[30:23] == 8'hff && a[31] != b[31])
      add_y = QNAN;                                // inf - inf
    else if (a[30:23] == 8'hff)
      add_y = a;
    else if (b[30:23] == 8'hff)
      add_y = b;
    else if (a_zero && b_zero)
      add_y = {a[31] & b[31], 31'd0};
    else if (b_zero)
      add_y = a;
    else if (a_zero)
      add_y = b;
    else if (sum[26:0] == 27'd0)
      add_y = 32'd0;                               // exact cancellation
    else if (e >= 11'sd255)
      add_y = {x[31], 8'hfe, 23'h7fffff};
    else if (e <= 11'sd0)
      add_y = {x[31], 31'd0};
    else
      add_y = {x[31], e[7:0], sum[25:3]};
  end

  assign y = (op == FP_MUL) ? mul_y : add_y;
endmodule
