// tb_azul_top_full: end-to-end test of the accelerator at its default size,
// a 16 x 16 torus of tiles with 64 KB instruction and data memories each
// (see tb_azul_e2e for what it loads, runs and checks).
module tb_azul_top_full;
  tb_azul_e2e #(.R(16), .C(16), .FULL(1'b1), .WATCHDOG(600000)) u_e2e ();
endmodule
