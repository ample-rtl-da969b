// tb_fetch_tag: a Fetch Tag with a small Message Queue (3 embeddings of 4
// words) fetches nodes of 2 and 7 neighbours from a memory model with random
// grant and response timing. Checks the message stream word by word, that
// agg_ready rises early with a partial response only for the large node, and
// that the tag goes idle once drained.
`include "tb_macros.svh"
module tb_fetch_tag;
  import ample_pkg::*;
  localparam int F = 4;
  logic clk = 0, rst_n = 0;
  logic start, busy, agg_ready, partial_evt;
  logic [31:0] adj_ptr, feature_base;
  logic [15:0] neighbours, in_features;
  logic mreq_valid, mreq_ready, mresp_valid, mresp_last, msg_valid, msg_ready;
  logic [31:0] mreq_addr, mresp_data, msg_data;
  logic [7:0] mreq_len;
  int checks = 0, failures = 0, partials = 0;

  fetch_tag #(.ADDR_Q_DEPTH(4), .MSG_Q_DEPTH(12), .MAX_FEATURES(8), .ID_BURST(4)) dut (.*);
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("watchdog"); `FINISH end

  function automatic logic [31:0] memword(input logic [31:0] a);
    if (a >= 32'h1000 && a < 32'h2000) return ((a - 32'h1000) / 4) * 3 + 5;   // neighbour ids
    return 32'hF000_0000 | (a / 4);                                              // features
  endfunction

  // memory responder: one burst at a time
  initial begin
    mreq_ready = 0; mresp_valid = 0; mresp_last = 0; mresp_data = 0;
    forever begin
      @(negedge clk);
      mreq_ready = 0; mresp_valid = 0; mresp_last = 0;
      if (mreq_valid && $urandom_range(0, 2) == 0) begin
        logic [31:0] a; int n;
        a = mreq_addr; n = int'(mreq_len) + 1;
        mreq_ready = 1;
        @(negedge clk); mreq_ready = 0;
        repeat ($urandom_range(1, 4)) @(negedge clk);
        for (int i = 0; i < n; i++) begin
          mresp_valid = 1; mresp_data = memword(a + 32'(4 * i)); mresp_last = (i == n - 1);
          @(negedge clk);
          mresp_valid = 0; mresp_last = 0;
        end
      end
    end
  end

  always @(posedge clk) if (partial_evt) partials++;

  task automatic run_node(input int nb, input bit expect_partial);
    int got = 0; int p0 = partials;
    @(negedge clk);
    adj_ptr = 32'h1000 + 32'(nb * 64); neighbours = 16'(nb); start = 1;
    @(negedge clk); start = 0;
    wait (agg_ready);
    @(negedge clk); @(negedge clk);
    if (expect_partial) `CHECK(partials == p0 + 1, "partial response on high-degree node")
    else                `CHECK(partials == p0, "no partial response on small node")
    for (int n = 0; n < nb; n++) begin
      logic [31:0] id;
      id = memword(adj_ptr + 32'(4 * n));
      for (int k = 0; k < F; k++) begin
        msg_ready = ($urandom_range(0, 1) == 0);
        while (!(msg_valid && msg_ready)) begin
          @(negedge clk); msg_ready = ($urandom_range(0, 1) == 0);
        end
        `CHECK(msg_data == memword(feature_base + id * F * 4 + 32'(4 * k)), "message word")
        got++;
        @(negedge clk); msg_ready = 0;
      end
    end
    `CHECK(got == nb * F, "word count")
    repeat (3) @(negedge clk);
    `CHECK(!busy && !agg_ready, "tag idle after drain")
  endtask

  initial begin
    start = 0; msg_ready = 0; in_features = 16'(F); feature_base = 32'h0010_0000;
    adj_ptr = 0; neighbours = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    run_node(2, 0);
    run_node(7, 1);
    run_node(3, 0);
    `FINISH
  end
endmodule
