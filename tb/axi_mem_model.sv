// axi_mem_model: behavioural AXI4 read-only memory with NPORTS ports.
//
// Stands in for HBM in simulation. All ports see one word-addressed store
// (`mem`, an associative array indexed by byte address / 4) that the
// testbench fills directly. Each port accepts one burst at a time: AR is
// accepted after a pseudo-random 0..3 cycle wait, then the beats of the
// INCR burst are returned after LATENCY cycles, with random one-cycle gaps.
// Unwritten words read as the word address XOR 32'hA5A50000.
module axi_mem_model
  import ample_pkg::*;
#(
  parameter int unsigned NPORTS  = 1,
  parameter int unsigned LATENCY = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ADDR_W-1:0] araddr  [NPORTS],
  input  logic [7:0]        arlen   [NPORTS],
  input  logic [NPORTS-1:0] arvalid,
  output logic [NPORTS-1:0] arready,
  output logic [DATA_W-1:0] rdata   [NPORTS],
  output logic [1:0]        rresp   [NPORTS],
  output logic [NPORTS-1:0] rlast,
  output logic [NPORTS-1:0] rvalid,
  input  logic [NPORTS-1:0] rready
);
  logic [31:0] mem [int unsigned];
  int unsigned total_bursts = 0;

  function automatic logic [31:0] rd(input int unsigned wa);
    if (mem.exists(wa)) return mem[wa];
    return wa ^ 32'hA5A50000;
  endfunction

  for (genvar p = 0; p < NPORTS; p++) begin : g_p
    int unsigned addr_q, left_q, wait_q;
    logic busy_q;
    assign rresp[p] = 2'b00;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        busy_q <= 1'b0; arready[p] <= 1'b0; rvalid[p] <= 1'b0; rlast[p] <= 1'b0;
        rdata[p] <= '0; addr_q <= 0; left_q <= 0; wait_q <= 0;
      end else begin
        arready[p] <= 1'b0;
        if (!busy_q) begin
          if (arvalid[p] && !arready[p] && ($urandom_range(0, 3) == 0)) begin
            arready[p] <= 1'b1;
            busy_q     <= 1'b1;
            addr_q     <= araddr[p] / 4;
            left_q     <= int'(arlen[p]) + 1;
            wait_q     <= LATENCY;
            total_bursts <= total_bursts + 1;
          end
        end else if (rvalid[p] && !rready[p]) begin
          // hold the beat
        end else if (wait_q != 0) begin
          rvalid[p] <= 1'b0;
          wait_q    <= wait_q - 1;
        end else if (left_q != 0) begin
          if ($urandom_range(0, 4) == 0) rvalid[p] <= 1'b0;
          else begin
            rvalid[p] <= 1'b1;
            rdata[p]  <= rd(addr_q);
            rlast[p]  <= (left_q == 1);
            addr_q    <= addr_q + 1;
            left_q    <= left_q - 1;
          end
        end else begin
          rvalid[p] <= 1'b0;
          rlast[p]  <= 1'b0;
          busy_q    <= 1'b0;
        end
      end
    end
  end
endmodule
