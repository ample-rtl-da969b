// tb_agg_mesh: an int8 mesh of 3x3 routers (3 BMs, 6 AGCs). Packets of two
// nodes are injected interleaved: node A (slot 3, 6 features in slices of
// 4 and 2 on AGCs 0 and 5, BM row 2, 3 neighbours, sum) and node B (slot 5,
// 4 features on AGC 2, BM row 0, 2 neighbours, mean). Checks the words
// written to the Aggregation Buffer port against sums computed here, one
// completion per node with the right BM, and the AGC free pulses.
`include "tb_macros.svh"
module tb_agg_mesh;
  import ample_pkg::*;
  localparam int AF = 4, R = 3, C = 3, NA = R * (C - 1);
  logic clk = 0, rst_n = 0;
  flit_t inj_flit; logic inj_valid, inj_ready;
  logic wr_valid, done_valid; logic [7:0] wr_slot, done_slot; logic [3:0] wr_idx;
  logic [31:0] wr_data; logic [1:0] done_bm; logic [NA-1:0] agc_free;
  int checks = 0, failures = 0, frees [NA], dones = 0;
  int abf [8][16];
  int expv [8][16];

  agg_mesh #(.PREC(PREC_INT8), .ROWS(R), .COLS(C), .AGC_FEATURES(AF), .MAX_FEATURES(16)) dut (.*);
  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("watchdog"); `FINISH end

  always @(posedge clk) if (rst_n) begin
    if (wr_valid) abf[wr_slot][wr_idx] = $signed(wr_data);
    for (int a = 0; a < NA; a++) if (agc_free[a]) frees[a]++;
    if (done_valid) begin
      dones++;
      `CHECK((done_slot == 8'd3 && done_bm == 2'd2) || (done_slot == 8'd5 && done_bm == 2'd0),
             "completion from the node's BM")
    end
  end

  task automatic send(input flit_t f);
    @(negedge clk); inj_flit = f; inj_valid = 1;
    @(posedge clk); while (!inj_ready) @(posedge clk);
    #1 inj_valid = 0;
  endtask

  task automatic pkt(input int slot, input int agc, input int bmr, input int ch, input int nch,
                     input bit last, input agg_func_e fn, input int len, input int f0);
    head_t h; h = '0;
    h.row = 4'(agc / (C - 1)); h.col = 4'(agc % (C - 1) + 1); h.slot = 8'(slot); h.last = last;
    h.func = fn; h.bm_row = 4'(bmr); h.chunk = 3'(ch); h.nchunks = 3'(nch);
    send('{FLIT_HEAD, h});
    for (int k = 0; k < len; k++) begin
      int v; v = $urandom_range(0, 255) - 128;
      expv[slot][f0 + k] += v;
      send('{FLIT_BODY, 32'(v)});
    end
    send('{FLIT_TAIL, 32'h0});
  endtask

  initial begin
    inj_valid = 0; inj_flit = '0;
    for (int s = 0; s < 8; s++) for (int k = 0; k < 16; k++) begin expv[s][k] = 0; abf[s][k] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 3; n++) begin
      pkt(3, 0, 2, 0, 2, n == 2, AGG_SUM, 4, 0);
      if (n < 2) pkt(5, 2, 0, 0, 1, n == 1, AGG_MEAN, 4, 0);
      pkt(3, 5, 2, 1, 2, n == 2, AGG_SUM, 2, 4);
    end
    repeat (200) @(negedge clk);
    for (int k = 0; k < 6; k++) `CHECK(abf[3][k] == expv[3][k], "node A sum")
    for (int k = 0; k < 4; k++) `CHECK(abf[5][k] == expv[5][k] / 2, "node B mean")
    `CHECK(dones == 2, "two completions")
    `CHECK(frees[0] == 1 && frees[5] == 1 && frees[2] == 1 && frees[1] == 0, "AGC free pulses")
    `FINISH
  end
endmodule
