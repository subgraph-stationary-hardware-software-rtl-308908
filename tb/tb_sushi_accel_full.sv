// tb_sushi_accel_full: the same end-to-end sequence as tb_sushi_accel with
// the accelerator at its default size (K_P=16, C_P=32, 1152-bit off-chip beat).
module tb_sushi_accel_full;
  sushi_env #(.FULL(1), .NQUERY(1)) u_env ();
endmodule
