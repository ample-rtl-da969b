// tb_weight_bank: loads 2 precisions of a 5x6 weight matrix from the AXI
// memory model and reads every entry back through every read port; then
// reloads a different shape and checks again.
`include "tb_macros.svh"
module tb_weight_bank;
  import ample_pkg::*;
  localparam int NP = 2, MI = 8, MO = 8, RP = 2;
  logic clk = 0, rst_n = 0;
  logic load, busy;
  logic [31:0] weight_base; logic [15:0] in_features, out_features;
  logic [2:0] rd_out [NP][RP]; logic [2:0] rd_in [NP][RP]; logic [31:0] rd_data [NP][RP];
  logic [31:0] m_araddr; logic [7:0] m_arlen; logic [2:0] m_arsize; logic [1:0] m_arburst;
  logic m_arvalid, m_arready, m_rlast, m_rvalid, m_rready;
  logic [31:0] m_rdata; logic [1:0] m_rresp;
  int checks = 0, failures = 0;

  weight_bank #(.NUM_PREC(NP), .MAX_IN(MI), .MAX_OUT(MO), .RD_PORTS(RP)) dut (.*);
  logic [31:0] ma [1]; logic [7:0] ml [1]; logic [31:0] md [1]; logic [1:0] mr [1];
  assign ma[0] = m_araddr; assign ml[0] = m_arlen; assign m_rdata = md[0]; assign m_rresp = mr[0];
  axi_mem_model #(.NPORTS(1), .LATENCY(2)) u_mem (
    .clk, .rst_n, .araddr(ma), .arlen(ml), .arvalid(m_arvalid), .arready(m_arready),
    .rdata(md), .rresp(mr), .rlast(m_rlast), .rvalid(m_rvalid), .rready(m_rready));

  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("watchdog"); `FINISH end

  task automatic load_and_check(input int nin, input int nout, input logic [31:0] base);
    @(negedge clk);
    weight_base = base; in_features = 16'(nin); out_features = 16'(nout); load = 1;
    @(negedge clk); load = 0;
    `CHECK(busy, "busy while loading")
    while (busy) @(negedge clk);
    for (int p = 0; p < NP; p++) for (int o = 0; o < nout; o++) for (int i = 0; i < nin; i++) begin
      for (int r = 0; r < RP; r++) begin rd_out[p][r] = 3'(o); rd_in[p][r] = 3'(i); end
      #1;
      for (int r = 0; r < RP; r++)
        `CHECK(rd_data[p][r] == (((base + 32'(((p * nout + o) * nin + i) * 4)) / 4) ^ 32'hA5A50000),
               "weight word")
    end
  endtask

  initial begin
    load = 0; weight_base = 0; in_features = 1; out_features = 1;
    for (int p = 0; p < NP; p++) for (int r = 0; r < RP; r++) begin rd_out[p][r] = 0; rd_in[p][r] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    load_and_check(5, 6, 32'h0008_0000);
    load_and_check(8, 3, 32'h0100_0000);
    `FINISH
  end
endmodule
