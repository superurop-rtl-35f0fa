// tb_azul_prog: the two task programs the system-level testbenches load into
// the tiles, and the data-memory layout they use.
//
// Task SPMV (y = alpha * A x for the rows a tile owns, matrix in CSR form):
//   recv alpha from the host, then for each local row i accumulate
//   vals[k] * x[colidx[k]] over rowptr[i] .. rowptr[i+1]-1 with fmul.s /
//   fadd.s, scale by alpha and send the result to the host with the global
//   row number in the metadata address field.
// Task CHAIN (one row of a lower-bidiagonal triangular solve, one row per
//   tile): x_k = (b_k + m_k * x_{k-1}) * d_k, with m_k = -L[k][k-1] and
//   d_k = 1 / L[k][k]. x_{k-1} has been written into this tile's data memory
//   by its predecessor. The tile sends x_k to the host and, unless it is the
//   last, writes x_k into its successor's data memory and starts the
//   successor's CHAIN task with a START_TASK message: the dependence is
//   carried entirely by network messages.
package tb_azul_prog;
  import tb_rv_asm::*;

  // data memory layout (byte addresses)
  localparam int D_NROWS     = 'h000;  // number of local rows
  localparam int D_ROWBASE   = 'h004;  // global index of the first local row
  localparam int D_META_HOST = 'h008;  // metadata for results to the host
  localparam int D_META_WR   = 'h00c;  // chain: write to successor
  localparam int D_META_ST   = 'h010;  // chain: start successor
  localparam int D_LAST      = 'h014;  // chain: 1 on the last tile
  localparam int D_META_HX   = 'h018;  // chain: metadata of x_k to the host
  localparam int D_B         = 'h020;
  localparam int D_M         = 'h024;
  localparam int D_D         = 'h028;
  localparam int D_ROWPTR    = 'h100;
  localparam int D_COLIDX    = 'h200;
  localparam int D_VALS      = 'h400;
  localparam int D_X         = 'h600;
  localparam int D_XPREV     = 'h700;

  localparam int SPMV_PC  = 'h040;
  localparam int CHAIN_PC = 'h200;
  localparam int TASK_SPMV  = 0;
  localparam int TASK_CHAIN = 1;

  // Fills prog (indexed by word address) with both tasks.
  function automatic void build(ref logic [31:0] prog [256]);
    int n, l_i, l_k, b_i, b_k, j_k, j_i, emit, done;
    for (int i = 0; i < 256; i++) prog[i] = NOP();
    n = SPMV_PC / 4;
    prog[n++] = RECV(20, 21);
    prog[n++] = LW(5, 0, D_NROWS);
    prog[n++] = LW(6, 0, D_ROWBASE);
    prog[n++] = LW(7, 0, D_META_HOST);
    prog[n++] = ADDI(8, 0, 0);
    l_i = n; b_i = n; prog[n++] = 0;                  // beq x8, x5, done
    prog[n++] = SLLI(9, 8, 2);
    prog[n++] = LW(10, 9, D_ROWPTR);
    prog[n++] = LW(11, 9, D_ROWPTR + 4);
    prog[n++] = ADDI(12, 0, 0);
    l_k = n; b_k = n; prog[n++] = 0;                  // beq x10, x11, emit
    prog[n++] = SLLI(13, 10, 2);
    prog[n++] = LW(14, 13, D_COLIDX);
    prog[n++] = LW(15, 13, D_VALS);
    prog[n++] = SLLI(14, 14, 2);
    prog[n++] = LW(16, 14, D_X);
    prog[n++] = MUL_FP(17, 15, 16);
    prog[n++] = ADD_FP(12, 12, 17);
    prog[n++] = ADDI(10, 10, 1);
    j_k = n; prog[j_k] = JAL(0, (l_k - j_k) * 4); n++;
    emit = n;
    prog[n++] = MUL_FP(12, 12, 21);
    prog[n++] = ADD(18, 6, 8);
    prog[n++] = SLLI(18, 18, 16);
    prog[n++] = ADD(19, 7, 18);
    prog[n++] = SEND(19, 12);
    prog[n++] = ADDI(8, 8, 1);
    j_i = n; prog[j_i] = JAL(0, (l_i - j_i) * 4); n++;
    done = n;
    prog[n++] = RET();
    prog[b_i] = BEQ(8, 5, (done - b_i) * 4);
    prog[b_k] = BEQ(10, 11, (emit - b_k) * 4);

    n = CHAIN_PC / 4;
    prog[n++] = LW(5, 0, D_XPREV);
    prog[n++] = LW(6, 0, D_B);
    prog[n++] = LW(7, 0, D_M);
    prog[n++] = LW(8, 0, D_D);
    prog[n++] = MUL_FP(9, 7, 5);
    prog[n++] = ADD_FP(9, 9, 6);
    prog[n++] = MUL_FP(9, 9, 8);
    prog[n++] = LW(10, 0, D_META_HX);
    prog[n++] = SEND(10, 9);
    prog[n++] = LW(11, 0, D_LAST);
    prog[n++] = BNE(11, 0, 5 * 4);
    prog[n++] = LW(12, 0, D_META_WR);
    prog[n++] = SEND(12, 9);
    prog[n++] = LW(13, 0, D_META_ST);
    prog[n++] = SEND(13, 0);
    prog[n++] = RET();
  endfunction

  // Exact conversion of a small integer to binary32.
  function automatic logic [31:0] i2f(int v);
    logic [63:0] d;
    if (v == 0) return 32'd0;
    d = $realtobits(real'(v));
    return {d[63], 8'(int'(d[62:52]) - 1023 + 127), d[51:29]};
  endfunction
endpackage
