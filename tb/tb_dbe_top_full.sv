// tb_dbe_top_full: one full 3840x2160 frame with four slice columns through
// dbe_top at its default parameters (see dbe_env).
module tb_dbe_top_full;
  dbe_env #(.MODE(1)) u_env ();
endmodule
