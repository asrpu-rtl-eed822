// tb_asrpu_full: end-to-end run of the accelerator with every parameter at its
// default (8 PEs, 512 KB shared memory, 1 MB model memory, 64 KB + 8 x 4 KB
// i-caches, 24 KB hypothesis memory). The test itself is in tb_asrpu_run.
module tb_asrpu_full;
  tb_asrpu_run #(.SMALL(1'b0)) run ();
endmodule
