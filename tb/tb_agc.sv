// tb_agc: a float AGC and an int8 AGC (4 features each) receive the packets
// of several nodes, each with a random number of neighbours, slice length
// and aggregation function (sum or mean). The result packet is checked:
// head fields (BM row, column 0, slot, chunk), one body per feature equal to
// the sum/mean computed here, the tail, and the `free` pulse. Float inputs
// are small integers and halves so the reference sums are exact.
`include "tb_macros.svh"
module tb_agc;
  import ample_pkg::*;
`include "tb_fp.svh"
  localparam int AF = 4;
  logic clk = 0, rst_n = 0;
  flit_t in_flit [2], out_flit [2];
  logic [1:0] in_valid, in_ready, out_valid, out_ready, free;
  int checks = 0, failures = 0, frees = 0;

  agc #(.PREC(PREC_FLOAT), .AGC_FEATURES(AF)) u_f (.clk, .rst_n,
    .in_flit(in_flit[0]), .in_valid(in_valid[0]), .in_ready(in_ready[0]),
    .out_flit(out_flit[0]), .out_valid(out_valid[0]), .out_ready(out_ready[0]), .free(free[0]));
  agc #(.PREC(PREC_INT8), .AGC_FEATURES(AF)) u_i (.clk, .rst_n,
    .in_flit(in_flit[1]), .in_valid(in_valid[1]), .in_ready(in_ready[1]),
    .out_flit(out_flit[1]), .out_valid(out_valid[1]), .out_ready(out_ready[1]), .free(free[1]));

  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("watchdog"); `FINISH end
  always @(posedge clk) frees += $countones(free);

  task automatic send(input int u, input flit_t f);
    @(negedge clk); in_flit[u] = f; in_valid[u] = 1;
    while (!in_ready[u]) @(negedge clk);
    @(posedge clk); #1 in_valid[u] = 0;
  endtask

  task automatic node(input int u, input int nb, input int len, input agg_func_e fn);
    real accr [AF]; int acci [AF];
    head_t h; flit_t f; int fr0;
    fr0 = frees;
    for (int k = 0; k < AF; k++) begin accr[k] = 0; acci[k] = 0; end
    for (int n = 0; n < nb; n++) begin
      h = '0; h.row = 4'(1); h.col = 4'(2); h.slot = 8'(7 + u); h.last = (n == nb - 1);
      h.func = fn; h.bm_row = 4'(3); h.chunk = 3'(1); h.nchunks = 3'(2);
      send(u, '{FLIT_HEAD, h});
      for (int k = 0; k < len; k++) begin
        int v; real r;
        v = $urandom_range(0, 40) - 20; r = real'(v) / 2.0;
        accr[k] += r; acci[k] += v;
        send(u, '{FLIT_BODY, (u == 0) ? r2f(r) : 32'(v)});
      end
      send(u, '{FLIT_TAIL, 32'h0});
    end
    // result packet
    for (int k = -1; k <= len; k++) begin
      @(negedge clk); out_ready[u] = ($urandom_range(0, 2) != 0);
      while (!(out_valid[u] && out_ready[u])) begin
        @(negedge clk); out_ready[u] = ($urandom_range(0, 2) != 0);
      end
      f = out_flit[u];
      if (k == -1) begin
        h = head_t'(f.data);
        `CHECK(f.ftype == FLIT_HEAD && h.row == 4'(3) && h.col == 0 && h.slot == 8'(7 + u)
               && h.chunk == 3'(1) && h.nchunks == 3'(2), "result head")
      end else if (k == len) begin
        `CHECK(f.ftype == FLIT_TAIL, "result tail")
      end else begin
        if (u == 0) begin
          real e; logic [31:0] eb; int d;
          e  = (fn == AGG_MEAN) ? accr[k] / nb : accr[k];
          eb = r2f(e);
          d  = int'(f.data) - int'(eb);
          // sums of halves are exact; a mean may differ by one unit in the
          // last place because the core truncates instead of rounding
          if (fn == AGG_SUM) `CHECK(f.ftype == FLIT_BODY && f.data == eb, "float sum")
          if (fn == AGG_MEAN) `CHECK(f.ftype == FLIT_BODY && d >= -1 && d <= 1, "float mean within 1 ulp")
        end else begin
          int e; e = (fn == AGG_MEAN) ? acci[k] / nb : acci[k];
          `CHECK(f.ftype == FLIT_BODY && $signed(f.data) == e, "int result")
        end
      end
      @(posedge clk); #1 out_ready[u] = 0;
    end
    repeat (2) @(negedge clk);
    `CHECK(frees == fr0 + 1, "free pulse")
  endtask

  initial begin
    in_valid = 0; out_ready = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 12; it++) begin
      node(0, $urandom_range(1, 6), $urandom_range(1, AF), agg_func_e'(it % 2));
      node(1, $urandom_range(1, 6), $urandom_range(1, AF), agg_func_e'(it % 2));
    end
    // mean with a power-of-two count keeps float exact; extra directed case
    node(0, 4, AF, AGG_MEAN);
    `FINISH
  end
endmodule
