// tb_aggregation_buffer: writes random words through all write ports and
// reads them back through every read port.
`include "tb_macros.svh"
module tb_aggregation_buffer;
  import ample_pkg::*;
  localparam int NS = 8, MF = 16, NP = 3, RP = 2;
  logic clk = 0;
  logic [NP-1:0] wr_valid;
  logic [2:0] wr_slot [NP];
  logic [3:0] wr_idx [NP];
  logic [31:0] wr_data [NP];
  logic [2:0] rd_slot [NP][RP];
  logic [3:0] rd_idx [NP][RP];
  logic [31:0] rd_data [NP][RP];
  logic [31:0] model [NS][MF];
  int checks = 0, failures = 0;

  aggregation_buffer #(.NODESLOTS(NS), .MAX_FEATURES(MF), .NUM_PREC(NP), .RD_PORTS(RP)) dut (.*);
  always #5 clk = ~clk;
  initial begin #100000; failures++; `FINISH end

  initial begin
    wr_valid = '0;
    // fill: port p writes slots with s % NP == p
    for (int s = 0; s < NS; s++)
      for (int f = 0; f < MF; f++) begin
        @(negedge clk);
        wr_valid = '0;
        wr_valid[s % NP] = 1'b1;
        wr_slot[s % NP] = 3'(s); wr_idx[s % NP] = 4'(f);
        wr_data[s % NP] = $urandom; model[s][f] = wr_data[s % NP];
      end
    @(negedge clk); wr_valid = '0;
    for (int it = 0; it < 300; it++) begin
      @(negedge clk);
      for (int p = 0; p < NP; p++) for (int r = 0; r < RP; r++) begin
        rd_slot[p][r] = 3'($urandom_range(0, NS-1)); rd_idx[p][r] = 4'($urandom_range(0, MF-1));
      end
      #1;
      for (int p = 0; p < NP; p++) for (int r = 0; r < RP; r++)
        `CHECK(rd_data[p][r] == model[rd_slot[p][r]][rd_idx[p][r]], "read back")
    end
    `FINISH
  end
endmodule
