// axi_read_master: AXI4 read master shared by one group of requesters.
//
// Takes one burst request at a time (address, length = beats - 1) on a
// valid/ready handshake, issues it on the AR channel (INCR bursts of 4-byte
// beats, ID 0) and forwards the R beats on resp_*, with resp_last on the
// final beat. It accepts the next request only after the last beat, so at
// most one burst is in flight. The paper names an AXI read master behind the
// Feature Bank arbiter; the single-outstanding policy is this design's
// simplification.
module axi_read_master
  import ample_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // request side
  input  logic              req_valid,
  input  logic [ADDR_W-1:0] req_addr,
  input  logic [7:0]        req_len,
  output logic              req_ready,
  output logic              resp_valid,
  output logic [DATA_W-1:0] resp_data,
  output logic              resp_last,
  // AXI4 read address channel
  output logic [ADDR_W-1:0] m_araddr,
  output logic [7:0]        m_arlen,
  output logic [2:0]        m_arsize,
  output logic [1:0]        m_arburst,
  output logic              m_arvalid,
  input  logic              m_arready,
  // AXI4 read data channel
  input  logic [DATA_W-1:0] m_rdata,
  input  logic [1:0]        m_rresp,
  input  logic              m_rlast,
  input  logic              m_rvalid,
  output logic              m_rready
);
  typedef enum logic [1:0] {S_IDLE, S_AR, S_R} state_e;
  state_e state_q;

  assign req_ready  = (state_q == S_IDLE);
  assign m_arvalid  = (state_q == S_AR);
  assign m_arsize   = 3'd2;
  assign m_arburst  = 2'b01;
  assign m_rready   = (state_q == S_R);
  assign resp_valid = m_rvalid && m_rready;
  assign resp_data  = m_rdata;
  assign resp_last  = m_rlast;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= S_IDLE;
      m_araddr <= '0;
      m_arlen  <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (req_valid) begin
          m_araddr <= req_addr;
          m_arlen  <= req_len;
          state_q  <= S_AR;
        end
        S_AR:   if (m_arready) state_q <= S_R;
        S_R:    if (m_rvalid && m_rlast) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // The error response is not handled; data is forwarded as received.
  logic unused_rresp;
  assign unused_rresp = ^m_rresp;

  assert property (@(posedge clk) disable iff (!rst_n)
                   m_arvalid && !m_arready |=> m_arvalid && $stable(m_araddr) && $stable(m_arlen));
endmodule
