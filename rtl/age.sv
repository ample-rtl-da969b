// age: Aggregation Engine.
//
// Holds one Aggregation Manager per nodeslot, one aggregation mesh per
// supported precision (float, int8, int4 by default) and the allocator that
// hands out the meshes' cores at run time. The NID offers one nodeslot per
// cycle on req_*. The allocator looks at that node's precision p and needs
// ceil(in_features / AGC_FEATURES) idle AGCs and one idle Buffering Manager
// in mesh p. If they are there, it marks them busy, programs the nodeslot's
// AGM with the allocation mask and accepts the request (req_ready) in the
// same cycle; otherwise it refuses (`alloc_stall` pulses) and the NID offers
// another node. AGMs then stream their Fetch Tag's messages into their mesh;
// a round-robin arbiter per mesh, held for the length of a packet, chooses
// which AGM injects. AGCs become idle again when they have sent their
// results; a BM when its node is complete, which also pulses done[slot].
// Each mesh writes the Aggregation Buffer through its own port. Dynamic
// allocation by precision and feature count and the per-precision
// sub-networks follow the paper; the lowest-index-first choice of free cores
// is this design's.
module age
  import ample_pkg::*;
#(
  parameter int unsigned NODESLOTS    = 64,
  parameter int unsigned NUM_PREC     = 3,
  parameter int unsigned MESH_ROWS    = 4,
  parameter int unsigned MESH_COLS    = 4,
  parameter int unsigned AGC_FEATURES = 16,
  parameter int unsigned MAX_FEATURES = 64,
  localparam int unsigned SW = $clog2(NODESLOTS),
  localparam int unsigned FW = $clog2(MAX_FEATURES),
  localparam int unsigned NUM_AGC = MESH_ROWS * (MESH_COLS - 1),
  localparam int unsigned RW = (MESH_ROWS > 1) ? $clog2(MESH_ROWS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // request from the NID
  input  logic                 req_valid,
  input  logic [SW-1:0]        req_slot,
  output logic                 req_ready,
  output logic                 alloc_stall,
  input  precision_e           slot_prec       [NODESLOTS],
  input  logic [15:0]          slot_neighbours [NODESLOTS],
  input  logic [15:0]          in_features,
  input  agg_func_e            agg_func,
  // message queues from the Feature Bank
  input  logic [NODESLOTS-1:0] msg_valid,
  input  logic [DATA_W-1:0]    msg_data [NODESLOTS],
  output logic [NODESLOTS-1:0] msg_ready,
  // Aggregation Buffer write ports, one per precision
  output logic [NUM_PREC-1:0]  abf_wr_valid,
  output logic [SW-1:0]        abf_wr_slot [NUM_PREC],
  output logic [FW-1:0]        abf_wr_idx  [NUM_PREC],
  output logic [DATA_W-1:0]    abf_wr_data [NUM_PREC],
  // completion
  output logic [NODESLOTS-1:0] done
);
  // ------------------------------------------------------------ allocator
  logic [NUM_AGC-1:0]   agc_busy_q [NUM_PREC];
  logic [MESH_ROWS-1:0] bm_busy_q  [NUM_PREC];
  logic [NUM_AGC-1:0]   agc_free   [NUM_PREC];
  logic [NUM_PREC-1:0]  m_done_v;
  logic [7:0]           m_done_slot [NUM_PREC];
  logic [RW-1:0]        m_done_bm   [NUM_PREC];

  int unsigned         nch;
  precision_e          rp;
  logic [NUM_AGC-1:0]  alloc_mask;
  logic [3:0]          alloc_bm;
  logic                have_agc, have_bm;
  logic [NODESLOTS-1:0] agm_busy;

  always_comb begin
    int unsigned taken;
    nch   = (int'(in_features) + AGC_FEATURES - 1) / AGC_FEATURES;
    rp    = slot_prec[req_slot];
    taken = 0;
    alloc_mask = '0;
    for (int unsigned a = 0; a < NUM_AGC; a++) begin
      if (!agc_busy_q[rp][a] && taken < nch) begin
        alloc_mask[a] = 1'b1;
        taken = taken + 1;
      end
    end
    have_agc = (taken == nch) && (nch != 0);
    have_bm  = 1'b0;
    alloc_bm = '0;
    for (int r = MESH_ROWS - 1; r >= 0; r--) begin
      if (!bm_busy_q[rp][r]) begin have_bm = 1'b1; alloc_bm = 4'(r); end
    end
    req_ready   = req_valid && have_agc && have_bm && !agm_busy[req_slot] &&
                  (int'(rp) < int'(NUM_PREC));
    alloc_stall = req_valid && !req_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < int'(NUM_PREC); p++) begin
        agc_busy_q[p] <= '0;
        bm_busy_q[p]  <= '0;
      end
      done <= '0;
    end else begin
      done <= '0;
      for (int p = 0; p < int'(NUM_PREC); p++) begin
        logic [NUM_AGC-1:0]   an;
        logic [MESH_ROWS-1:0] bn;
        an = agc_busy_q[p] & ~agc_free[p];
        bn = bm_busy_q[p];
        if (m_done_v[p]) begin
          bn[m_done_bm[p]] = 1'b0;
          done[m_done_slot[p][SW-1:0]] <= 1'b1;
        end
        if (req_ready && int'(rp) == p) begin
          an = an | alloc_mask;
          bn[alloc_bm[RW-1:0]] = 1'b1;
        end
        agc_busy_q[p] <= an;
        bm_busy_q[p]  <= bn;
      end
    end
  end

  // ------------------------------------------------ aggregation managers
  flit_t               agm_flit [NODESLOTS];
  logic [NODESLOTS-1:0] agm_valid, agm_ready, agm_done;
  precision_e          agm_prec [NODESLOTS];

  for (genvar s = 0; s < NODESLOTS; s++) begin : g_agm
    agm #(.SLOT(s), .MESH_COLS(MESH_COLS), .NUM_AGC(NUM_AGC),
          .AGC_FEATURES(AGC_FEATURES)) u_agm (
      .clk, .rst_n,
      .cfg_valid(req_ready && int'(req_slot) == s), .cfg_prec(rp),
      .cfg_mask(alloc_mask), .cfg_bm_row(alloc_bm), .cfg_nchunks(3'(nch)),
      .cfg_func(agg_func), .cfg_neighbours(slot_neighbours[s]), .cfg_features(in_features),
      .busy(agm_busy[s]), .prec(agm_prec[s]), .done(agm_done[s]),
      .msg_valid(msg_valid[s]), .msg_data(msg_data[s]), .msg_ready(msg_ready[s]),
      .out_flit(agm_flit[s]), .out_valid(agm_valid[s]), .out_ready(agm_ready[s]));
  end

  // ------------------------------------------- per-precision sub-networks
  logic [NODESLOTS-1:0] inj_gnt [NUM_PREC];
  logic [NUM_PREC-1:0]  inj_rdy;

  for (genvar p = 0; p < NUM_PREC; p++) begin : g_mesh
    logic [NODESLOTS-1:0] req;
    logic [SW-1:0]        gidx;
    logic                 gv, in_pkt_q, fire;
    logic [7:0]           wslot;
    for (genvar s = 0; s < NODESLOTS; s++) begin : g_req
      assign req[s] = agm_valid[s] && int'(agm_prec[s]) == p;
    end
    rr_arbiter #(.N(NODESLOTS)) u_inj_arb (
      .clk, .rst_n, .req, .hold(in_pkt_q), .accept(fire),
      .gnt(inj_gnt[p]), .gnt_idx(gidx), .gnt_valid(gv));
    assign fire = gv && inj_rdy[p];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)    in_pkt_q <= 1'b0;
      else if (fire) in_pkt_q <= (agm_flit[gidx].ftype != FLIT_TAIL);
    end

    agg_mesh #(.PREC(precision_e'(p)), .ROWS(MESH_ROWS), .COLS(MESH_COLS),
               .AGC_FEATURES(AGC_FEATURES), .MAX_FEATURES(MAX_FEATURES)) u_mesh (
      .clk, .rst_n,
      .inj_flit(agm_flit[gidx]), .inj_valid(gv), .inj_ready(inj_rdy[p]),
      .wr_valid(abf_wr_valid[p]), .wr_slot(wslot), .wr_idx(abf_wr_idx[p]),
      .wr_data(abf_wr_data[p]),
      .done_valid(m_done_v[p]), .done_slot(m_done_slot[p]), .done_bm(m_done_bm[p]),
      .agc_free(agc_free[p]));
    assign abf_wr_slot[p] = wslot[SW-1:0];
  end

  always_comb begin
    agm_ready = '0;
    for (int p = 0; p < int'(NUM_PREC); p++)
      agm_ready = agm_ready | (inj_rdy[p] ? inj_gnt[p] : '0);
  end

  // A nodeslot cannot be allocated while its AGM is still streaming.
  assert property (@(posedge clk) disable iff (!rst_n)
                   req_ready |-> !agm_busy[req_slot]);
endmodule
