// ample_top: AMPLE graph neural network inference accelerator.
//
// Wires the Node Instruction Decoder (host registers and nodeslot
// scoreboard), the Prefetcher (Feature Bank of Fetch Tags and the Weight
// Bank), the Aggregation Engine (Aggregation Managers, one mesh network per
// precision with Aggregation Cores and Buffering Managers, allocator), the
// Aggregation Buffer and one Feature Transformation Engine per precision.
// A node's life: the host programs a free nodeslot over AXI-Lite and launches
// it; its Fetch Tag reads the adjacency list and the neighbour embeddings
// from HBM; when enough has arrived the NID offers the node to the AGE, which
// gives it cores of its precision; the AGCs sum (or average) the neighbour
// embeddings and the BM stores the result in the Aggregation Buffer; the FTE
// of that precision multiplies it by the layer weights and writes the updated
// embedding to memory; the nodeslot is freed and an interrupt bit is set.
//
// External interfaces: AXI-Lite slave (host), interrupt, HBM_BANKS AXI4 read
// ports for the Feature Bank (one per HBM bank), one AXI4 read port for the
// Weight Bank and one valid/ready write port for updated embeddings, shared
// by the FTEs through a round-robin arbiter. The instruction prefetcher from
// DRAM shown in the paper's block diagram is not included; nodeslots are
// programmed through the AXI-Lite port.
module ample_top
  import ample_pkg::*;
#(
  parameter int unsigned NODESLOTS    = 64,
  parameter int unsigned HBM_BANKS    = 32,
  parameter int unsigned NUM_PREC     = 3,
  parameter int unsigned MESH_ROWS    = 4,
  parameter int unsigned MESH_COLS    = 4,
  parameter int unsigned AGC_FEATURES = 16,
  parameter int unsigned MAX_FEATURES = 64,
  parameter int unsigned MAX_OUT      = 64,
  parameter int unsigned SYS_ROWS     = 4,
  parameter int unsigned SYS_COLS     = 4,
  parameter int unsigned ADDR_Q_DEPTH = 16,
  parameter int unsigned MSG_Q_DEPTH  = 256,
  parameter int unsigned AXI_AW       = 12,
  localparam int unsigned SW = $clog2(NODESLOTS),
  localparam int unsigned FW = $clog2(MAX_FEATURES),
  localparam int unsigned OW = $clog2(MAX_OUT)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host AXI-Lite
  input  logic [AXI_AW-1:0]    s_awaddr,
  input  logic                 s_awvalid,
  output logic                 s_awready,
  input  logic [31:0]          s_wdata,
  input  logic [3:0]           s_wstrb,
  input  logic                 s_wvalid,
  output logic                 s_wready,
  output logic [1:0]           s_bresp,
  output logic                 s_bvalid,
  input  logic                 s_bready,
  input  logic [AXI_AW-1:0]    s_araddr,
  input  logic                 s_arvalid,
  output logic                 s_arready,
  output logic [31:0]          s_rdata,
  output logic [1:0]           s_rresp,
  output logic                 s_rvalid,
  input  logic                 s_rready,
  output logic                 irq,
  // Feature Bank HBM read ports
  output logic [ADDR_W-1:0]    hbm_araddr  [HBM_BANKS],
  output logic [7:0]           hbm_arlen   [HBM_BANKS],
  output logic [2:0]           hbm_arsize  [HBM_BANKS],
  output logic [1:0]           hbm_arburst [HBM_BANKS],
  output logic [HBM_BANKS-1:0] hbm_arvalid,
  input  logic [HBM_BANKS-1:0] hbm_arready,
  input  logic [DATA_W-1:0]    hbm_rdata   [HBM_BANKS],
  input  logic [1:0]           hbm_rresp   [HBM_BANKS],
  input  logic [HBM_BANKS-1:0] hbm_rlast,
  input  logic [HBM_BANKS-1:0] hbm_rvalid,
  output logic [HBM_BANKS-1:0] hbm_rready,
  // Weight Bank read port
  output logic [ADDR_W-1:0]    wt_araddr,
  output logic [7:0]           wt_arlen,
  output logic [2:0]           wt_arsize,
  output logic [1:0]           wt_arburst,
  output logic                 wt_arvalid,
  input  logic                 wt_arready,
  input  logic [DATA_W-1:0]    wt_rdata,
  input  logic [1:0]           wt_rresp,
  input  logic                 wt_rlast,
  input  logic                 wt_rvalid,
  output logic                 wt_rready,
  // updated embedding writes
  output logic                 out_wr_valid,
  output logic [ADDR_W-1:0]    out_wr_addr,
  output logic [DATA_W-1:0]    out_wr_data,
  input  logic                 out_wr_ready
);
  // NID
  logic [15:0]          in_features, out_features;
  agg_func_e            agg_func;
  logic [ADDR_W-1:0]    feature_base, feature_stride, weight_base;
  logic [ADDR_W-1:0]    slot_fbase [NODESLOTS];
  logic                 weight_load, weight_busy;
  precision_e           slot_prec       [NODESLOTS];
  logic [15:0]          slot_neighbours [NODESLOTS];
  logic [ADDR_W-1:0]    slot_adj_ptr    [NODESLOTS];
  logic [ADDR_W-1:0]    slot_out_ptr    [NODESLOTS];
  ns_state_e            slot_state      [NODESLOTS];
  logic [NODESLOTS-1:0] available, ft_start, ft_agg_ready, ft_busy, ft_partial;
  logic                 age_req_valid, age_req_ready, alloc_stall;
  logic [SW-1:0]        age_req_slot;
  logic [NODESLOTS-1:0] age_done, fte_pending, fte_pick, fte_done;

  nid #(.NODESLOTS(NODESLOTS), .AXI_AW(AXI_AW)) u_nid (
    .clk, .rst_n,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready, .irq,
    .in_features, .out_features, .agg_func, .feature_base, .feature_stride, .weight_base,
    .weight_load, .weight_busy,
    .slot_prec, .slot_neighbours, .slot_adj_ptr, .slot_out_ptr, .slot_state, .available,
    .ft_start, .ft_agg_ready,
    .age_req_valid, .age_req_slot, .age_req_ready, .age_done,
    .fte_pending, .fte_pick, .fte_done);

  // Prefetcher: Feature Bank. Each precision has its own embedding table.
  for (genvar s = 0; s < NODESLOTS; s++) begin : g_fbase
    assign slot_fbase[s] = feature_base + ADDR_W'(slot_prec[s]) * feature_stride;
  end
  logic [NODESLOTS-1:0] msg_valid, msg_ready;
  logic [DATA_W-1:0]    msg_data [NODESLOTS];

  feature_bank #(.NODESLOTS(NODESLOTS), .GROUPS(HBM_BANKS), .ADDR_Q_DEPTH(ADDR_Q_DEPTH),
                 .MSG_Q_DEPTH(MSG_Q_DEPTH), .MAX_FEATURES(MAX_FEATURES)) u_fb (
    .clk, .rst_n,
    .start(ft_start), .adj_ptr(slot_adj_ptr), .neighbours(slot_neighbours),
    .in_features, .feature_base(slot_fbase),
    .busy(ft_busy), .agg_ready(ft_agg_ready), .partial_evt(ft_partial),
    .msg_valid, .msg_data, .msg_ready,
    .m_araddr(hbm_araddr), .m_arlen(hbm_arlen), .m_arsize(hbm_arsize),
    .m_arburst(hbm_arburst), .m_arvalid(hbm_arvalid), .m_arready(hbm_arready),
    .m_rdata(hbm_rdata), .m_rresp(hbm_rresp), .m_rlast(hbm_rlast),
    .m_rvalid(hbm_rvalid), .m_rready(hbm_rready));

  // Prefetcher: Weight Bank
  logic [OW-1:0]        wb_out  [NUM_PREC][SYS_COLS];
  logic [FW-1:0]        wb_in   [NUM_PREC][SYS_COLS];
  logic [DATA_W-1:0]    wb_data [NUM_PREC][SYS_COLS];

  weight_bank #(.NUM_PREC(NUM_PREC), .MAX_IN(MAX_FEATURES), .MAX_OUT(MAX_OUT),
                .RD_PORTS(SYS_COLS)) u_wb (
    .clk, .rst_n, .load(weight_load), .weight_base, .in_features, .out_features,
    .busy(weight_busy), .rd_out(wb_out), .rd_in(wb_in), .rd_data(wb_data),
    .m_araddr(wt_araddr), .m_arlen(wt_arlen), .m_arsize(wt_arsize),
    .m_arburst(wt_arburst), .m_arvalid(wt_arvalid), .m_arready(wt_arready),
    .m_rdata(wt_rdata), .m_rresp(wt_rresp), .m_rlast(wt_rlast),
    .m_rvalid(wt_rvalid), .m_rready(wt_rready));

  // Aggregation Engine
  logic [NUM_PREC-1:0]  abf_wr_valid;
  logic [SW-1:0]        abf_wr_slot [NUM_PREC];
  logic [FW-1:0]        abf_wr_idx  [NUM_PREC];
  logic [DATA_W-1:0]    abf_wr_data [NUM_PREC];

  age #(.NODESLOTS(NODESLOTS), .NUM_PREC(NUM_PREC), .MESH_ROWS(MESH_ROWS),
        .MESH_COLS(MESH_COLS), .AGC_FEATURES(AGC_FEATURES),
        .MAX_FEATURES(MAX_FEATURES)) u_age (
    .clk, .rst_n,
    .req_valid(age_req_valid), .req_slot(age_req_slot), .req_ready(age_req_ready),
    .alloc_stall, .slot_prec, .slot_neighbours, .in_features, .agg_func,
    .msg_valid, .msg_data, .msg_ready,
    .abf_wr_valid, .abf_wr_slot, .abf_wr_idx, .abf_wr_data,
    .done(age_done));

  // Aggregation Buffer
  logic [SW-1:0]        abf_rd_slot [NUM_PREC][SYS_ROWS];
  logic [FW-1:0]        abf_rd_idx  [NUM_PREC][SYS_ROWS];
  logic [DATA_W-1:0]    abf_rd_data [NUM_PREC][SYS_ROWS];

  aggregation_buffer #(.NODESLOTS(NODESLOTS), .MAX_FEATURES(MAX_FEATURES),
                       .NUM_PREC(NUM_PREC), .RD_PORTS(SYS_ROWS)) u_abf (
    .clk, .wr_valid(abf_wr_valid), .wr_slot(abf_wr_slot), .wr_idx(abf_wr_idx),
    .wr_data(abf_wr_data), .rd_slot(abf_rd_slot), .rd_idx(abf_rd_idx),
    .rd_data(abf_rd_data));

  // Transformation Engines, one per precision
  logic [NODESLOTS-1:0] p_pick [NUM_PREC];
  logic [NODESLOTS-1:0] p_done [NUM_PREC];
  logic [NUM_PREC-1:0]  f_wv, f_wr, f_busy;
  logic [ADDR_W-1:0]    f_wa [NUM_PREC];
  logic [DATA_W-1:0]    f_wd [NUM_PREC];

  for (genvar p = 0; p < NUM_PREC; p++) begin : g_fte
    logic [NODESLOTS-1:0] pend;
    for (genvar s = 0; s < NODESLOTS; s++) begin : g_pend
      assign pend[s] = fte_pending[s] && int'(slot_prec[s]) == p;
    end
    fte #(.PREC(precision_e'(p)), .NODESLOTS(NODESLOTS), .SYS_ROWS(SYS_ROWS),
          .SYS_COLS(SYS_COLS), .MAX_IN(MAX_FEATURES), .MAX_OUT(MAX_OUT)) u_fte (
      .clk, .rst_n, .pending(pend), .weights_ready(!weight_busy),
      .pick(p_pick[p]), .done(p_done[p]), .in_features, .out_features,
      .out_ptr(slot_out_ptr),
      .abf_slot(abf_rd_slot[p]), .abf_idx(abf_rd_idx[p]), .abf_data(abf_rd_data[p]),
      .w_out(wb_out[p]), .w_in(wb_in[p]), .w_data(wb_data[p]),
      .wr_valid(f_wv[p]), .wr_addr(f_wa[p]), .wr_data(f_wd[p]), .wr_ready(f_wr[p]),
      .busy(f_busy[p]));
  end

  always_comb begin
    fte_pick = '0;
    fte_done = '0;
    for (int p = 0; p < int'(NUM_PREC); p++) begin
      fte_pick = fte_pick | p_pick[p];
      fte_done = fte_done | p_done[p];
    end
  end

  // shared write port for updated embeddings
  logic [NUM_PREC-1:0] w_gnt;
  logic [$clog2(NUM_PREC > 1 ? NUM_PREC : 2)-1:0] w_idx;
  logic w_gv;
  rr_arbiter #(.N(NUM_PREC)) u_warb (
    .clk, .rst_n, .req(f_wv), .hold(1'b0), .accept(out_wr_ready),
    .gnt(w_gnt), .gnt_idx(w_idx), .gnt_valid(w_gv));
  assign out_wr_valid = w_gv;
  assign out_wr_addr  = f_wa[w_idx];
  assign out_wr_data  = f_wd[w_idx];
  assign f_wr         = out_wr_ready ? w_gnt : '0;
endmodule
