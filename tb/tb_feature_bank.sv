// tb_feature_bank: 6 Fetch Tags in 3 groups (3 HBM ports) fetch different
// nodes at the same time from the AXI memory model; each tag's message
// stream is drained by a random consumer and checked word by word. Also
// checks that the groups overlap in time (concurrent memory access).
`include "tb_macros.svh"
module tb_feature_bank;
  import ample_pkg::*;
  localparam int NS = 6, G = 3, F = 3;
  logic clk = 0, rst_n = 0;
  logic [NS-1:0] start, busy, agg_ready, partial_evt, msg_valid, msg_ready;
  logic [31:0] adj_ptr [NS]; logic [15:0] neighbours [NS];
  logic [15:0] in_features; logic [31:0] fbase; logic [31:0] feature_base [NS];
  assign feature_base = '{default: fbase};
  logic [31:0] msg_data [NS];
  logic [31:0] m_araddr [G]; logic [7:0] m_arlen [G]; logic [2:0] m_arsize [G]; logic [1:0] m_arburst [G];
  logic [G-1:0] m_arvalid, m_arready, m_rlast, m_rvalid, m_rready;
  logic [31:0] m_rdata [G]; logic [1:0] m_rresp [G];
  int checks = 0, failures = 0, overlap = 0;

  feature_bank #(.NODESLOTS(NS), .GROUPS(G), .ADDR_Q_DEPTH(4), .MSG_Q_DEPTH(16), .MAX_FEATURES(8)) dut (.*);
  axi_mem_model #(.NPORTS(G), .LATENCY(3)) u_mem (
    .clk, .rst_n, .araddr(m_araddr), .arlen(m_arlen), .arvalid(m_arvalid), .arready(m_arready),
    .rdata(m_rdata), .rresp(m_rresp), .rlast(m_rlast), .rvalid(m_rvalid), .rready(m_rready));

  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("watchdog"); `FINISH end
  always @(posedge clk) if ($countones(m_rvalid & m_rready) > 1) overlap++;

  // consumers: one per tag, random ready, checks each popped word
  int wn [NS], wk [NS];
  logic [NS-1:0] started;
  int cnt_done;
  always @(negedge clk) begin
    for (int s = 0; s < NS; s++) msg_ready[s] <= started[s] && ($urandom_range(0, 2) != 0);
  end
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      started <= '0; cnt_done <= 0;
      for (int s = 0; s < NS; s++) begin wn[s] <= 0; wk[s] <= 0; end
    end else begin
      for (int s = 0; s < NS; s++) begin
        if (agg_ready[s]) started[s] <= 1'b1;
        if (msg_valid[s] && msg_ready[s]) begin
          `CHECK(msg_data[s] == exp_word(s, wn[s], wk[s]), "message word")
          if (wk[s] == F - 1) begin
            wk[s] <= 0; wn[s] <= wn[s] + 1;
            if (wn[s] == 1 + s) cnt_done <= cnt_done + 1;
          end else wk[s] <= wk[s] + 1;
        end
      end
    end
  end

  function automatic logic [31:0] exp_word(input int s, input int n, input int k);
    logic [31:0] id;
    id = (((32'h2000 + 32'(s) * 256 + 32'(4 * n)) / 4) ^ 32'hA5A50000) & 32'hFF;
    return ((fbase + id * F * 4 + 32'(4 * k)) / 4) ^ 32'hA5A50000;
  endfunction

  initial begin
    start = '0; in_features = F; fbase = 32'h4000_0000;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int s = 0; s < NS; s++) begin
      adj_ptr[s] = 32'h2000 + 32'(s) * 256; neighbours[s] = 16'(2 + s);
      // neighbour ids: mask the default memory pattern to a small id
      for (int n = 0; n < 2 + s; n++) begin
        int unsigned wa;
        wa = (adj_ptr[s] + 32'(4 * n)) / 4;
        u_mem.mem[wa] = (wa ^ 32'hA5A50000) & 32'hFF;
      end
    end
    @(negedge clk); start = '1; @(negedge clk); start = '0;
    wait (cnt_done == NS);
    repeat (5) @(negedge clk);
    `CHECK(busy == '0, "all tags idle")
    `CHECK(overlap > 0, "groups read memory concurrently")
    `FINISH
  end
endmodule
