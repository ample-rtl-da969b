// tb_noc_router: router at (1,1) of a 3x3 grid. Random packets (head, 1-4
// bodies, tail) enter on all five inputs towards random destinations; each
// output has a randomly stalling sink. Checks that every flit leaves on the
// dimension-order output, that packets are not interleaved on an output,
// and that every packet arrives complete and in order.
`include "tb_macros.svh"
module tb_noc_router;
  import ample_pkg::*;
  logic clk = 0, rst_n = 0;
  flit_t in_flit [5], out_flit [5];
  logic [4:0] in_valid, in_ready, out_valid, out_ready;
  int checks = 0, failures = 0;
  int sent = 0, recv = 0;
  localparam int NPKT = 60;

  noc_router #(.ROW(1), .COL(1), .BUF_DEPTH(2)) dut (.*);
  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("watchdog"); `FINISH end

  function automatic int exp_port(input head_t h);
    if (h.col > 1) return P_EAST;
    if (h.col < 1) return P_WEST;
    if (h.row > 1) return P_SOUTH;
    if (h.row < 1) return P_NORTH;
    return P_LOCAL;
  endfunction

  // per-input packet generators; body data encodes (input, packet, index)
  int pk [5], fi [5], plen [5];
  head_t hd [5];
  always @(negedge clk) begin
    for (int i = 0; i < 5; i++) begin
      if (!rst_n) begin pk[i] = 0; fi[i] = -1; in_valid[i] = 0; end
      else begin
        if (in_ready_q[i]) begin
          fi[i]++;
          if (fi[i] > plen[i]) begin fi[i] = -1; pk[i]++; sent++; end
        end
        if (fi[i] == -1 && pk[i] < NPKT) begin
          hd[i] = '0; hd[i].row = 4'($urandom_range(0, 2)); hd[i].col = 4'($urandom_range(0, 2));
          hd[i].slot = 8'(i * 16 + pk[i] % 16);
          plen[i] = $urandom_range(1, 4);
          fi[i] = 0;
        end
        in_valid[i] = (fi[i] >= 0) && ($urandom_range(0, 3) != 0);
        if (fi[i] == 0) begin in_flit[i].ftype = FLIT_HEAD; in_flit[i].data = hd[i]; end
        else if (fi[i] > 0 && fi[i] < plen[i]) begin
          in_flit[i].ftype = FLIT_BODY; in_flit[i].data = {8'(i), 8'(pk[i]), 16'(fi[i])};
        end else begin in_flit[i].ftype = FLIT_TAIL; in_flit[i].data = {8'(i), 8'(pk[i]), 16'hFFFF}; end
        out_ready[i] = ($urandom_range(0, 2) != 0);
      end
    end
  end
  logic [4:0] in_ready_q;
  always @(posedge clk) in_ready_q <= in_valid & in_ready;  // accepted this edge

  // receivers
  int cur_in [5], cur_pk [5], cur_k [5];
  always @(posedge clk) begin
    if (rst_n) for (int o = 0; o < 5; o++) begin
      if (out_valid[o] && out_ready[o]) begin
        flit_t f; f = out_flit[o];
        if (f.ftype == FLIT_HEAD) begin
          head_t h; h = head_t'(f.data);
          `CHECK(cur_in[o] < 0, "no interleaving on an output")
          `CHECK(exp_port(h) == o, "dimension-order route")
          cur_in[o] = int'(h.slot) / 16; cur_k[o] = 1; cur_pk[o] = -1;
        end else begin
          `CHECK(cur_in[o] >= 0, "body/tail inside a packet")
          `CHECK(int'(f.data[31:24]) == cur_in[o], "flit from the packet's input")
          if (f.ftype == FLIT_BODY) begin
            `CHECK(int'(f.data[15:0]) == cur_k[o], "body order")
            cur_k[o]++;
          end else begin
            cur_in[o] = -1; recv++;
          end
        end
      end
    end
  end

  initial begin
    for (int o = 0; o < 5; o++) cur_in[o] = -1;
    in_valid = '0; out_ready = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    wait (recv == 5 * NPKT);
    `CHECK(sent == 5 * NPKT, "all packets sent")
    `FINISH
  end
endmodule
