// tb_agm: an Aggregation Manager owning AGCs {1, 4, 6} of a 3x4 mesh
// (mask 0b1010010) streams a node of 3 neighbours x 10 features (slices of
// 4, 4, 2) from a message queue with random gaps into a sink with random
// back-pressure. Checks the packet sequence: per neighbour, one packet per
// slice to the right AGC coordinates, `last` only on the final neighbour,
// body words in message order, and the `done` pulse.
`include "tb_macros.svh"
module tb_agm;
  import ample_pkg::*;
  localparam int AF = 4, NA = 9, NB = 3, F = 10;
  logic clk = 0, rst_n = 0;
  logic cfg_valid, busy, done, msg_valid, msg_ready, out_valid, out_ready;
  precision_e cfg_prec, prec; logic [NA-1:0] cfg_mask; logic [3:0] cfg_bm_row;
  logic [2:0] cfg_nchunks; agg_func_e cfg_func; logic [15:0] cfg_neighbours, cfg_features;
  logic [31:0] msg_data; flit_t out_flit;
  int checks = 0, failures = 0, dones = 0, sent_words = 0;

  agm #(.SLOT(9), .MESH_COLS(4), .NUM_AGC(NA), .AGC_FEATURES(AF)) dut (.*);
  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("watchdog"); `FINISH end
  always @(posedge clk) if (rst_n && done) dones++;

  // message source: word i = 100 + i
  always @(negedge clk) begin
    if (!rst_n) begin msg_valid <= 0; msg_data <= 100; end
    else begin
      if (msg_valid && msg_ready_q) begin msg_data <= msg_data + 1; sent_words <= sent_words + 1; end
      msg_valid <= (sent_words + ((msg_valid && msg_ready_q) ? 1 : 0) < NB * F) && ($urandom_range(0, 3) != 0);
      out_ready <= ($urandom_range(0, 2) != 0);
    end
  end
  logic msg_ready_q;
  always @(posedge clk) msg_ready_q <= msg_valid && msg_ready;

  int exp_agc [3] = '{1, 4, 6};
  int lens [3] = '{4, 4, 2};
  initial begin
    int word; flit_t f; head_t h;
    cfg_valid = 0; out_ready = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk);
    cfg_valid = 1; cfg_prec = PREC_INT8; cfg_mask = 9'b001010010; cfg_bm_row = 4'd2;
    cfg_nchunks = 3'd3; cfg_func = AGG_MEAN; cfg_neighbours = 16'(NB); cfg_features = 16'(F);
    @(negedge clk); cfg_valid = 0;
    `CHECK(busy && prec == PREC_INT8, "busy with stored precision")
    word = 100;
    for (int n = 0; n < NB; n++) for (int c = 0; c < 3; c++) for (int k = -1; k <= lens[c]; k++) begin
      @(posedge clk); while (!(out_valid && out_ready)) @(posedge clk);
      f = out_flit;
      if (k == -1) begin
        h = head_t'(f.data);
        `CHECK(f.ftype == FLIT_HEAD, "head")
        `CHECK(int'(h.row) == exp_agc[c] / 3 && int'(h.col) == exp_agc[c] % 3 + 1, "AGC coordinates")
        `CHECK(h.slot == 8'd9 && h.bm_row == 4'd2 && int'(h.chunk) == c && h.nchunks == 3'd3
               && h.func == AGG_MEAN, "head fields")
        `CHECK(h.last == (n == NB - 1), "last flag")
      end else if (k == lens[c]) `CHECK(f.ftype == FLIT_TAIL, "tail")
      else begin
        `CHECK(f.ftype == FLIT_BODY && f.data == 32'(word), "body in message order")
        word++;
      end
    end
    repeat (2) @(negedge clk);
    `CHECK(dones == 1 && !busy, "done pulse and idle")
    `FINISH
  end
endmodule
