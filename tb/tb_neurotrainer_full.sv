// tb_neurotrainer_full: the same end-to-end test with the accelerator at
// its full size (default parameters: 15 PEs, 32 lanes, 16 KB buffers).
module tb_neurotrainer_full;
  tb_nt_core #(.FULL(1)) u_core ();
endmodule
