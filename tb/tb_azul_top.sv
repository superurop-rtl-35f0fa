// tb_azul_top: end-to-end test of the accelerator on a 4 x 4 torus (see
// tb_azul_e2e for what it loads, runs and checks).
module tb_azul_top;
  tb_azul_e2e #(.R(4), .C(4), .FULL(1'b0), .WATCHDOG(200000)) u_e2e ();
endmodule
