// tb_sgs_top_full: end-to-end test of the accelerator with every size at its
// default (sgs_top instantiated without parameters): two tiles of a scene whose
// large voxel holds more Gaussians than an input-buffer bank (512) and a
// sorting buffer (256). The scene, stimulus and checks are in tb_sgs_env.
module tb_sgs_top_full;
  tb_sgs_env #(.FULL(1'b1)) env ();
endmodule
