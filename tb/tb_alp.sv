// tb_alp: tests the chunk configured as the ALP (LT_ADDER, 8 PEs, the
// accelerator's default) with random layers in both loop orders, through the
// shared chunk_harness environment.
module tb_alp;
  import nasa_pkg::*;
  chunk_harness #(.KIND(LT_ADDER), .N_PE(8)) h ();
endmodule
