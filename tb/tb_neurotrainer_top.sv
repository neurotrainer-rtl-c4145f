// tb_neurotrainer_top: end-to-end test of the accelerator at a reduced size
// (3 PEs, 4 lanes, small buffers); the test itself is in tb_nt_core.
module tb_neurotrainer_top;
  tb_nt_core #(.FULL(0)) u_core ();
endmodule
