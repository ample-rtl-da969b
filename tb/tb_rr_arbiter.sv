// tb_rr_arbiter: checks round-robin order, hold and fairness of rr_arbiter
// (N=5) against a reference pointer model under random requests.
`include "tb_macros.svh"
module tb_rr_arbiter;
  localparam int N = 5;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] req, gnt;
  logic hold, accept, gv;
  logic [2:0] gidx;
  int checks = 0, failures = 0;
  int last = N - 1;
  int wins [N];

  rr_arbiter #(.N(N)) dut (.clk, .rst_n, .req, .hold, .accept, .gnt, .gnt_idx(gidx), .gnt_valid(gv));

  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("watchdog"); `FINISH end

  initial begin
    req = '0; hold = 0; accept = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      int exp;
      @(negedge clk);
      req    = N'($urandom);
      hold   = ($urandom_range(0, 4) == 0);
      accept = ($urandom_range(0, 3) != 0);
      #1;
      exp = -1;
      if (hold) exp = req[last] ? last : -1;
      else for (int i = 1; i <= N; i++) if (exp < 0 && req[(last + i) % N]) exp = (last + i) % N;
      `CHECK(gv == (hold ? req[last] : (req != 0)), "grant valid iff a request (or the holder's)")
      if (exp >= 0) begin
        `CHECK(int'(gidx) == exp, "round-robin winner")
        `CHECK(gnt == N'(1 << exp), "one-hot grant")
        if (accept) begin last = exp; wins[exp]++; end
      end else `CHECK(gnt == '0, "no grant without request")
    end
    // all-request fairness: N consecutive accepts grant everyone once
    @(negedge clk); req = '1; hold = 0; accept = 1;
    for (int i = 0; i < N; i++) wins[i] = 0;
    for (int k = 0; k < N; k++) begin #1; wins[gidx]++; @(negedge clk); end
    for (int i = 0; i < N; i++) `CHECK(wins[i] == 1, "each requester served once per round")
    `FINISH
  end
endmodule
