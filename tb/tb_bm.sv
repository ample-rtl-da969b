// tb_bm: a Buffering Manager receives the result packets of 3 slices of a
// node (slice lengths 4, 4, 2) in shuffled order, with a randomly granted
// buffer write port. Checks every write (slot, index, data), that `done`
// rises only after the last slice and holds until acknowledged, then
// repeats for a second node.
`include "tb_macros.svh"
module tb_bm;
  import ample_pkg::*;
  localparam int AF = 4;
  logic clk = 0, rst_n = 0;
  flit_t in_flit; logic in_valid, in_ready;
  logic wr_valid, wr_ready, done, done_ack;
  logic [7:0] wr_slot, done_slot; logic [3:0] wr_idx; logic [31:0] wr_data;
  int checks = 0, failures = 0, writes = 0;
  logic [31:0] exp_mem [16];
  int exp_slot;

  bm #(.AGC_FEATURES(AF), .MAX_FEATURES(16)) dut (.*);
  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("watchdog"); `FINISH end

  always @(negedge clk) wr_ready <= ($urandom_range(0, 2) != 0);
  always @(posedge clk) if (rst_n && wr_valid && wr_ready) begin
    `CHECK(int'(wr_slot) == exp_slot, "write slot")
    `CHECK(wr_data == exp_mem[wr_idx], "write data at index")
    writes++;
  end

  task automatic send(input flit_t f);
    @(negedge clk); in_flit = f; in_valid = 1;
    @(posedge clk); while (!in_ready) @(posedge clk);
    #1 in_valid = 0;
  endtask

  task automatic node(input int slot);
    int order [3] = '{2, 0, 1};
    int lens [3] = '{4, 4, 2};
    int w0; head_t h;
    exp_slot = slot; w0 = writes;
    for (int i = 0; i < 16; i++) exp_mem[i] = $urandom;
    if (slot % 2) begin order = '{1, 2, 0}; end
    for (int j = 0; j < 3; j++) begin
      int c; c = order[j];
      `CHECK(!done, "not done before the last slice")
      h = '0; h.slot = 8'(slot); h.chunk = 3'(c); h.nchunks = 3'd3;
      send('{FLIT_HEAD, h});
      for (int k = 0; k < lens[c]; k++) send('{FLIT_BODY, exp_mem[c * AF + k]});
      send('{FLIT_TAIL, 32'h0});
    end
    @(negedge clk);
    `CHECK(done && int'(done_slot) == slot, "done after all slices")
    repeat (3) @(negedge clk);
    `CHECK(done, "done held until ack")
    done_ack = 1; @(negedge clk); done_ack = 0;
    `CHECK(!done, "done cleared by ack")
    `CHECK(writes == w0 + 10, "ten words written")
  endtask

  initial begin
    in_valid = 0; done_ack = 0; in_flit = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    node(5); node(12); node(3);
    `FINISH
  end
endmodule
