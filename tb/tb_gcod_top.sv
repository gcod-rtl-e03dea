// tb_gcod_top: end-to-end test of the accelerator at reduced size (8 lanes,
// 3 chunks of 16 nodes, 48 nodes). See tb_gcod_top_body.svh for the test.
module tb_gcod_top;
  import gcod_pkg::*;
  localparam int L = 8, NC = 3, WD = 16, NN = 48, FIN = 12;

  gcod_top #(.LANES(L), .NUM_CHUNKS(NC), .FDEPTH(256), .WDEPTH(WD), .ODEPTH(WD),
             .N_NODES(NN), .EDEPTH(512)) dut (.*);

`include "tb_gcod_top_body.svh"
endmodule
