// tb_ample_top: end-to-end test of ample_top at reduced size: 8 nodeslots,
// 4 HBM ports, 3x3 meshes of AGCs with 4 features each, 16 input and 8
// output features, 2x2 systolic arrays, a Message Queue of 3 embeddings.
// 40 graph nodes, two layers. See tb_ample_top_body.svh for what is checked.
`include "tb_macros.svh"
module tb_ample_top;
  import ample_pkg::*;
`include "tb_fp.svh"
  localparam int NS = 8, HB = 4, AF = 4, MF = 16, MO = 8, NNODES = 40, MAXDEG = 8;
  ample_top #(.NODESLOTS(NS), .HBM_BANKS(HB), .NUM_PREC(3), .MESH_ROWS(3), .MESH_COLS(3),
              .AGC_FEATURES(AF), .MAX_FEATURES(MF), .MAX_OUT(MO), .SYS_ROWS(2), .SYS_COLS(2),
              .ADDR_Q_DEPTH(4), .MSG_Q_DEPTH(48)) dut (.*);
  initial begin #20000000; failures++; $display("watchdog"); `FINISH end
`include "tb_ample_top_body.svh"
endmodule
