// tb_asrpu_top: end-to-end run of the accelerator with small memories, 4 PEs and an
// 8-record hypothesis set, so that every mechanism including set overflow occurs.
// The test itself is in tb_asrpu_run.
module tb_asrpu_top;
  tb_asrpu_run #(.SMALL(1'b1)) run ();
endmodule
