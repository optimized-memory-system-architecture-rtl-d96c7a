// tb_dbe_top: end-to-end test of the Type 2 back end on small frames with
// 1, 2 and 4 slice columns, RGB and bypass colour modes (see dbe_env).
module tb_dbe_top;
  dbe_env #(.MODE(0)) u_env ();
endmodule
