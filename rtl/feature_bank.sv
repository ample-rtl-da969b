// feature_bank: the Prefetcher's store of neighbour embeddings.
//
// Holds one Fetch Tag per nodeslot. Tags are split into GROUPS groups of
// NODESLOTS/GROUPS consecutive tags; each group owns one HBM bank port. In a
// group a round-robin arbiter picks one requesting tag, its burst goes out
// through the group's AXI read master, and the returning beats are steered
// back to the tag that was granted (held in `owner_q` until the last beat).
// Each tag gets its own embedding table base (one table per precision).
// Groups work in parallel, so up to GROUPS tags read memory at once. Each
// tag's Message Queue is read by the Aggregation Manager of the same index.
// Grouping per HBM bank and round-robin arbitration inside a group follow
// the paper; the default of 2 tags per group (64 tags, 32 banks) is this
// design's reading of "up to 32 Fetch Tags can access memory concurrently".
module feature_bank
  import ample_pkg::*;
#(
  parameter int unsigned NODESLOTS    = 64,
  parameter int unsigned GROUPS       = 32,
  parameter int unsigned ADDR_Q_DEPTH = 16,
  parameter int unsigned MSG_Q_DEPTH  = 256,
  parameter int unsigned MAX_FEATURES = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  // per-nodeslot programming from the NID
  input  logic [NODESLOTS-1:0] start,
  input  logic [ADDR_W-1:0]    adj_ptr    [NODESLOTS],
  input  logic [15:0]          neighbours [NODESLOTS],
  input  logic [15:0]          in_features,
  input  logic [ADDR_W-1:0]    feature_base [NODESLOTS],
  output logic [NODESLOTS-1:0] busy,
  output logic [NODESLOTS-1:0] agg_ready,
  output logic [NODESLOTS-1:0] partial_evt,
  // message queues to the Aggregation Managers
  output logic [NODESLOTS-1:0] msg_valid,
  output logic [DATA_W-1:0]    msg_data [NODESLOTS],
  input  logic [NODESLOTS-1:0] msg_ready,
  // one AXI4 read port per group (HBM bank)
  output logic [ADDR_W-1:0]    m_araddr  [GROUPS],
  output logic [7:0]           m_arlen   [GROUPS],
  output logic [2:0]           m_arsize  [GROUPS],
  output logic [1:0]           m_arburst [GROUPS],
  output logic [GROUPS-1:0]    m_arvalid,
  input  logic [GROUPS-1:0]    m_arready,
  input  logic [DATA_W-1:0]    m_rdata   [GROUPS],
  input  logic [1:0]           m_rresp   [GROUPS],
  input  logic [GROUPS-1:0]    m_rlast,
  input  logic [GROUPS-1:0]    m_rvalid,
  output logic [GROUPS-1:0]    m_rready
);
  localparam int unsigned TPG = NODESLOTS / GROUPS;
  localparam int unsigned TW  = (TPG > 1) ? $clog2(TPG) : 1;

  logic [NODESLOTS-1:0] t_mreq_valid, t_mreq_ready, t_resp_valid, t_resp_last;
  logic [ADDR_W-1:0]    t_mreq_addr [NODESLOTS];
  logic [7:0]           t_mreq_len  [NODESLOTS];
  logic [DATA_W-1:0]    t_resp_data [NODESLOTS];

  for (genvar s = 0; s < NODESLOTS; s++) begin : g_tag
    fetch_tag #(.ADDR_Q_DEPTH(ADDR_Q_DEPTH), .MSG_Q_DEPTH(MSG_Q_DEPTH),
                .MAX_FEATURES(MAX_FEATURES)) u_tag (
      .clk, .rst_n,
      .start(start[s]), .adj_ptr(adj_ptr[s]), .neighbours(neighbours[s]),
      .in_features, .feature_base(feature_base[s]),
      .busy(busy[s]), .agg_ready(agg_ready[s]), .partial_evt(partial_evt[s]),
      .mreq_valid(t_mreq_valid[s]), .mreq_addr(t_mreq_addr[s]), .mreq_len(t_mreq_len[s]),
      .mreq_ready(t_mreq_ready[s]),
      .mresp_valid(t_resp_valid[s]), .mresp_data(t_resp_data[s]), .mresp_last(t_resp_last[s]),
      .msg_valid(msg_valid[s]), .msg_data(msg_data[s]), .msg_ready(msg_ready[s]));
  end

  for (genvar g = 0; g < GROUPS; g++) begin : g_grp
    logic [TPG-1:0] req, gnt;
    logic [TW-1:0]  gidx, owner_q;
    logic           gvalid, rm_req_ready, rm_resp_valid, rm_resp_last;
    logic [DATA_W-1:0] rm_resp_data;

    assign req = t_mreq_valid[g*TPG +: TPG];

    rr_arbiter #(.N(TPG)) u_arb (
      .clk, .rst_n, .req, .hold(1'b0), .accept(rm_req_ready),
      .gnt, .gnt_idx(gidx), .gnt_valid(gvalid));

    axi_read_master u_rm (
      .clk, .rst_n,
      .req_valid(gvalid), .req_addr(t_mreq_addr[g*TPG + int'(gidx)]),
      .req_len(t_mreq_len[g*TPG + int'(gidx)]), .req_ready(rm_req_ready),
      .resp_valid(rm_resp_valid), .resp_data(rm_resp_data), .resp_last(rm_resp_last),
      .m_araddr(m_araddr[g]), .m_arlen(m_arlen[g]), .m_arsize(m_arsize[g]),
      .m_arburst(m_arburst[g]), .m_arvalid(m_arvalid[g]), .m_arready(m_arready[g]),
      .m_rdata(m_rdata[g]), .m_rresp(m_rresp[g]), .m_rlast(m_rlast[g]),
      .m_rvalid(m_rvalid[g]), .m_rready(m_rready[g]));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                      owner_q <= '0;
      else if (gvalid && rm_req_ready) owner_q <= gidx;
    end

    for (genvar t = 0; t < TPG; t++) begin : g_route
      assign t_mreq_ready[g*TPG+t] = gnt[t] && rm_req_ready;
      assign t_resp_valid[g*TPG+t] = rm_resp_valid && (int'(owner_q) == t);
      assign t_resp_last [g*TPG+t] = rm_resp_last;
      assign t_resp_data [g*TPG+t] = rm_resp_data;
    end
  end
endmodule
