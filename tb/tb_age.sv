// tb_age: self-checking test of the Aggregation Engine with 6 nodeslots,
// three precisions and 3x3 meshes (6 AGCs and 3 BMs each), 4 features per
// AGC and up to 16 features.
//
// The test plays the NID and the Feature Bank: it offers nodeslots that
// hold a node to the allocator one per cycle in random order, and serves
// each slot's Message Queue with the neighbour embeddings of a random node
// (random degree, random precision, small integer values, stalls on
// msg_valid). Three rounds run with different feature counts and the sum
// and mean functions. Every Aggregation Buffer write is captured per
// precision port; when done[slot] rises the captured vector must equal the
// sum (or the mean: truncated for integers, within rounding for float)
// worked out here. Requests must stall at least once for lack of AGCs.
`include "tb_macros.svh"
module tb_age;
  import ample_pkg::*;
`include "tb_fp.svh"
  localparam int NS = 6, AF = 4, MF = 16;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, alloc_stall; logic [2:0] req_slot;
  precision_e slot_prec [NS]; logic [15:0] slot_neighbours [NS];
  logic [15:0] in_features; agg_func_e agg_func;
  logic [NS-1:0] msg_valid, msg_ready, done;
  logic [31:0] msg_data [NS];
  logic [2:0] abf_wr_valid; logic [2:0] abf_wr_slot [3]; logic [3:0] abf_wr_idx [3];
  logic [31:0] abf_wr_data [3];
  int checks = 0, failures = 0;

  age #(.NODESLOTS(NS), .NUM_PREC(3), .MESH_ROWS(3), .MESH_COLS(3),
        .AGC_FEATURES(AF), .MAX_FEATURES(MF)) dut (.*);
  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("watchdog"); `FINISH end

  // per-slot node description
  int vals [NS][8][MF];     // neighbour n, feature k
  int deg [NS];
  int sent [NS];            // words already delivered
  logic [NS-1:0] waiting, granted, active;
  logic [31:0] abf [NS][MF];
  int n_stall = 0, n_done = 0;

  function automatic logic [31:0] enc(input precision_e p, input int v);
    return (p == PREC_FLOAT) ? r2f(real'(v)) : 32'(v);
  endfunction

  // message queues
  always @(negedge clk) for (int s = 0; s < NS; s++) begin
    msg_valid[s] = active[s] && sent[s] < deg[s] * in_features && ($urandom_range(0, 3) != 0);
    msg_data[s]  = msg_valid[s] ? enc(slot_prec[s], vals[s][sent[s] / in_features][sent[s] % in_features]) : '0;
  end
  // requests
  always @(negedge clk) begin
    int c [$];
    c.delete();
    for (int s = 0; s < NS; s++) if (waiting[s]) c.push_back(s);
    req_valid = (c.size() > 0);
    req_slot  = req_valid ? 3'(c[$urandom_range(0, c.size() - 1)]) : '0;
  end
  always @(posedge clk) if (rst_n) begin
    if (alloc_stall) n_stall++;
    if (req_valid && req_ready) begin waiting[req_slot] = 0; granted[req_slot] = 1; end
    for (int s = 0; s < NS; s++) if (msg_valid[s] && msg_ready[s]) sent[s]++;
    for (int p = 0; p < 3; p++) if (abf_wr_valid[p]) begin
      `CHECK(slot_prec[abf_wr_slot[p]] == precision_e'(p), "write on the node's precision port")
      abf[abf_wr_slot[p]][abf_wr_idx[p]] = abf_wr_data[p];
    end
    for (int s = 0; s < NS; s++) if (done[s]) begin
      `CHECK(granted[s], "done for a granted slot")
      `CHECK(sent[s] == deg[s] * in_features, "all messages consumed")
      for (int k = 0; k < in_features; k++) begin
        int e; real er;
        e = 0; for (int n = 0; n < deg[s]; n++) e += vals[s][n][k];
        er = real'(e);
        if (agg_func == AGG_MEAN) begin e = e / deg[s]; er = er / deg[s]; end
        if (slot_prec[s] == PREC_FLOAT) begin
          real g; g = f2r(abf[s][k]);
          `CHECK(g - er < 1e-5 && er - g < 1e-5, "float aggregate")
        end else `CHECK($signed(abf[s][k]) == e, "integer aggregate")
      end
      granted[s] = 0; active[s] = 0; n_done++;
    end
  end

  task automatic round(input int nf, input agg_func_e fn, input int nodes);
    int launched = 0, target;
    in_features = 16'(nf); agg_func = fn;
    target = n_done + nodes;
    while (n_done < target) begin
      @(negedge clk);
      for (int s = 0; s < NS; s++) if (!active[s] && launched < nodes) begin
        deg[s] = $urandom_range(1, 8);
        slot_prec[s] = precision_e'($urandom_range(0, 2));
        slot_neighbours[s] = 16'(deg[s]);
        for (int n = 0; n < 8; n++) for (int k = 0; k < MF; k++) vals[s][n][k] = $urandom_range(0, 40) - 20;
        for (int k = 0; k < MF; k++) abf[s][k] = 32'hDEAD_BEEF;
        sent[s] = 0; active[s] = 1; waiting[s] = 1; launched++;
      end
    end
  endtask

  initial begin
    for (int s = 0; s < NS; s++) begin
      slot_prec[s] = PREC_FLOAT; slot_neighbours[s] = 0; deg[s] = 0; sent[s] = 0; msg_data[s] = 0;
    end
    waiting = 0; granted = 0; active = 0; msg_valid = 0; req_valid = 0; req_slot = 0;
    in_features = 16; agg_func = AGG_SUM;
    repeat (3) @(negedge clk); rst_n = 1;
    round(16, AGG_SUM, 30);
    round(7, AGG_MEAN, 30);
    round(12, AGG_SUM, 20);
    `CHECK(n_stall > 0, "allocation stall happened")
    $display("done=%0d stalls=%0d", n_done, n_stall);
    `FINISH
  end
endmodule
