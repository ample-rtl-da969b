// tb_fte: an int8 and a float Transformation Engine (2x3 systolic arrays,
// 5 input and 7 output features, so three tiles with a partial last one)
// each transform 5 pending nodeslots, in batches of 2, 2 and 1. Aggregated
// features and weights come from functions of their indices. Checks every
// written word and address against a matrix-vector product computed here,
// the pick/done pulses, and the cycle count of each batch:
// tiles * (1 + IN + ROWS + COLS - 2 + ROWS*COLS) + 1 from pick to done.
`include "tb_macros.svh"
module tb_fte;
  import ample_pkg::*;
`include "tb_fp.svh"
  localparam int NS = 8, R = 2, C = 3, IN = 5, OUT = 7;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  logic [NS-1:0] pending [2], pick [2], done [2];
  logic [31:0] out_ptr [NS];
  logic [2:0] abf_slot [2][R]; logic [2:0] abf_idx [2][R]; logic [31:0] abf_data [2][R];
  logic [2:0] w_out [2][C]; logic [2:0] w_in [2][C]; logic [31:0] w_data [2][C];
  logic [1:0] wr_valid, wr_ready, busy; logic [31:0] wr_addr [2], wr_data [2];
  logic [15:0] in_features = IN, out_features = OUT;

  for (genvar u = 0; u < 2; u++) begin : g_u
    fte #(.PREC(u == 0 ? PREC_INT8 : PREC_FLOAT), .NODESLOTS(NS), .SYS_ROWS(R), .SYS_COLS(C),
          .MAX_IN(8), .MAX_OUT(8)) dut (
      .clk, .rst_n, .pending(pending[u]), .weights_ready(1'b1), .pick(pick[u]), .done(done[u]),
      .in_features, .out_features, .out_ptr,
      .abf_slot(abf_slot[u]), .abf_idx(abf_idx[u]), .abf_data(abf_data[u]),
      .w_out(w_out[u]), .w_in(w_in[u]), .w_data(w_data[u]),
      .wr_valid(wr_valid[u]), .wr_addr(wr_addr[u]), .wr_data(wr_data[u]), .wr_ready(wr_ready[u]),
      .busy(busy[u]));
  end

  function automatic int av(input int s, input int i); return ((s * 7 + i * 3) % 11) - 5; endfunction
  function automatic int wv(input int o, input int i); return ((o * 5 + i * 2) % 9) - 4; endfunction

  always_comb begin
    for (int r = 0; r < R; r++) begin
      abf_data[0][r] = 32'(av(int'(abf_slot[0][r]), int'(abf_idx[0][r])));
      abf_data[1][r] = r2f(real'(av(int'(abf_slot[1][r]), int'(abf_idx[1][r]))));
    end
    for (int c = 0; c < C; c++) begin
      w_data[0][c] = 32'(wv(int'(w_out[0][c]), int'(w_in[0][c])));
      w_data[1][c] = r2f(real'(wv(int'(w_out[1][c]), int'(w_in[1][c]))));
    end
  end

  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("watchdog"); `FINISH end

  int writes [2];
  int tpick [2], batches [2];
  localparam int TILES = (OUT + C - 1) / C;
  localparam int LAT = TILES * (1 + IN + R + C - 2 + R * C) + 1;
  always @(posedge clk) if (rst_n) for (int u = 0; u < 2; u++) begin
    if (wr_valid[u] && wr_ready[u]) begin
      int s, o, e;
      s = -1;
      for (int k = 0; k < NS; k++) if (wr_addr[u] >= out_ptr[k] && wr_addr[u] < out_ptr[k] + 64) s = k;
      o = int'(wr_addr[u] - out_ptr[s]) / 4;
      e = 0;
      for (int i = 0; i < IN; i++) e += av(s, i) * wv(o, i);
      if (u == 0) `CHECK($signed(wr_data[u]) == e, "int8 result")
      else        `CHECK(wr_data[u] == r2f(real'(e)), "float result")
      writes[u]++;
    end
    if (pick[u] != 0) begin
      `CHECK($countones(pick[u]) == ((batches[u] == 2) ? 1 : 2), "batch size")
      pending[u] <= pending[u] & ~pick[u];
      tpick[u] = int'($time / 10);
    end
    if (done[u] != 0) begin
      `CHECK(int'($time / 10) - tpick[u] == LAT, "batch latency")
      batches[u]++;
    end
  end

  initial begin
    for (int s = 0; s < NS; s++) out_ptr[s] = 32'h1000 + 32'(s) * 64;
    pending[0] = '0; pending[1] = '0; wr_ready = 2'b11;
    writes = '{0, 0}; batches = '{0, 0};
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk);
    pending[0] = 8'b1011_0101; pending[1] = 8'b1110_0110;
    wait (batches[0] == 3 && batches[1] == 3);
    `CHECK(writes[0] == 5 * OUT && writes[1] == 5 * OUT, "all outputs written")
    `FINISH
  end
endmodule
