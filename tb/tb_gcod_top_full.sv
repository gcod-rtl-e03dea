// tb_gcod_top_full: end-to-end test of the accelerator with every parameter
// at its default (1024 lanes per sub-accelerator, 3 chunks of 256 nodes, 768
// nodes, 64 input features). See tb_gcod_top_body.svh for the test.
module tb_gcod_top_full;
  import gcod_pkg::*;
  localparam int L = 1024, NC = 3, WD = 256, NN = 768, FIN = 64;

  gcod_top dut (.*);

`include "tb_gcod_top_body.svh"
endmodule
