// tb_slp: tests the chunk configured as the SLP (LT_SHIFT, 24 PEs, the
// accelerator's default) with random layers in both loop orders, through the
// shared chunk_harness environment.
module tb_slp;
  import nasa_pkg::*;
  chunk_harness #(.KIND(LT_SHIFT), .N_PE(24)) h ();
endmodule
