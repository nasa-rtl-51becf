// tb_clp: tests the chunk configured as the CLP (LT_CONV, 24 PEs, the
// accelerator's default) with random layers in both loop orders, through the
// shared chunk_harness environment.
module tb_clp;
  import nasa_pkg::*;
  chunk_harness #(.KIND(LT_CONV), .N_PE(24)) h ();
endmodule
