// tb_ample_top_full: end-to-end test of ample_top with every parameter at
// its default (64 nodeslots, 32 HBM ports, 4x4 meshes, 64 features, 4x4
// systolic arrays). 80 graph nodes of degree up to 8, two layers, so the
// 64 nodeslots are all filled and then reused. See tb_ample_top_body.svh
// for what is checked.
`include "tb_macros.svh"
module tb_ample_top_full;
  import ample_pkg::*;
`include "tb_fp.svh"
  localparam int NS = 64, HB = 32, AF = 16, MF = 64, MO = 64, NNODES = 80, MAXDEG = 8;
  ample_top dut (.*);
  initial begin #40000000; failures++; $display("watchdog"); `FINISH end
`include "tb_ample_top_body.svh"
endmodule
