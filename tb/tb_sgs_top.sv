// tb_sgs_top: end-to-end test of the accelerator at reduced sizes (2-entry
// adjacency lists, 32-record input-buffer banks, 16-entry sorting buffers), so
// that every overflow and split path is taken in a short simulation. The
// scene, stimulus and checks are in tb_sgs_env.
module tb_sgs_top;
  tb_sgs_env #(.FULL(1'b0)) env ();
endmodule
