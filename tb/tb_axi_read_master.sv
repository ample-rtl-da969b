// tb_axi_read_master: random bursts through axi_read_master into the AXI
// memory model; checks every returned beat, resp_last and the AR fields.
`include "tb_macros.svh"
module tb_axi_read_master;
  import ample_pkg::*;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, resp_valid, resp_last;
  logic [31:0] req_addr, resp_data;
  logic [7:0] req_len;
  logic [31:0] m_araddr; logic [7:0] m_arlen; logic [2:0] m_arsize; logic [1:0] m_arburst;
  logic m_arvalid, m_arready, m_rlast, m_rvalid, m_rready;
  logic [31:0] m_rdata; logic [1:0] m_rresp;
  int checks = 0, failures = 0;

  axi_read_master dut (.*);
  logic [31:0] ma [1]; logic [7:0] ml [1]; logic [31:0] md [1]; logic [1:0] mr [1];
  assign ma[0] = m_araddr; assign ml[0] = m_arlen;
  assign m_rdata = md[0]; assign m_rresp = mr[0];
  axi_mem_model #(.NPORTS(1), .LATENCY(2)) u_mem (
    .clk, .rst_n, .araddr(ma), .arlen(ml), .arvalid(m_arvalid), .arready(m_arready),
    .rdata(md), .rresp(mr), .rlast(m_rlast), .rvalid(m_rvalid), .rready(m_rready));

  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("watchdog"); `FINISH end

  initial begin
    req_valid = 0; req_addr = 0; req_len = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int b = 0; b < 40; b++) begin
      logic [31:0] a; int n, got;
      a = 32'($urandom_range(0, 1 << 20)) * 4; n = $urandom_range(1, 20);
      @(negedge clk);
      req_valid = 1; req_addr = a; req_len = 8'(n - 1);
      while (!req_ready) @(negedge clk);
      @(negedge clk); req_valid = 0;
      `CHECK(m_arsize == 3'd2 && m_arburst == 2'b01, "AR size/burst")
      got = 0;
      while (got < n) begin
        @(posedge clk); #1;
        if (resp_valid) begin
          `CHECK(resp_data == ((a / 4 + 32'(got)) ^ 32'hA5A50000), "beat data")
          `CHECK(resp_last == (got == n - 1), "resp_last")
          got++;
        end
      end
    end
    `FINISH
  end
endmodule
