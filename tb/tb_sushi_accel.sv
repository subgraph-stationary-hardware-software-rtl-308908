// tb_sushi_accel: end-to-end test of the accelerator at a reduced array size
// (K_P=4, C_P=4); see sushi_env for the sequence and the checks.
module tb_sushi_accel;
  sushi_env #(.FULL(0)) u_env ();
endmodule
