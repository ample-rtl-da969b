// agg_mesh: the isolated aggregation sub-network of one precision.
//
// A ROWS x COLS grid of noc_router instances joined to their four
// neighbours. Column 0 routers carry a Buffering Manager on their LOCAL port;
// every other router carries an Aggregation Core of precision PREC, numbered
// row by row (AGC a at row a/(COLS-1), column a%(COLS-1)+1). Packets from the
// Aggregation Managers enter at the WEST port of router (0,0). All other edge
// ports are unused: their inputs are idle and their outputs never ready,
// which dimension-order routing guarantees they never need. The Buffering
// Managers share one Aggregation Buffer write port and one completion port,
// each through a round-robin arbiter. `agc_free` pulses when an AGC has sent
// its result. Separate meshes per precision follow the paper; the placement
// of BMs and the injection point are this design's choices.
module agg_mesh
  import ample_pkg::*;
#(
  parameter precision_e  PREC         = PREC_FLOAT,
  parameter int unsigned ROWS         = 4,
  parameter int unsigned COLS         = 4,
  parameter int unsigned AGC_FEATURES = 16,
  parameter int unsigned MAX_FEATURES = 64,
  parameter int unsigned BUF_DEPTH    = 4,
  localparam int unsigned NUM_AGC = ROWS * (COLS - 1),
  localparam int unsigned FW = $clog2(MAX_FEATURES),
  localparam int unsigned RW = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  flit_t              inj_flit,
  input  logic               inj_valid,
  output logic               inj_ready,
  // Aggregation Buffer write port
  output logic               wr_valid,
  output logic [7:0]         wr_slot,
  output logic [FW-1:0]      wr_idx,
  output logic [DATA_W-1:0]  wr_data,
  // node completion (always accepted)
  output logic               done_valid,
  output logic [7:0]         done_slot,
  output logic [RW-1:0]      done_bm,
  output logic [NUM_AGC-1:0] agc_free
);
  flit_t      rin_f  [ROWS][COLS][5];
  flit_t      rout_f [ROWS][COLS][5];
  logic [4:0] rin_v  [ROWS][COLS];
  logic [4:0] rin_r  [ROWS][COLS];
  logic [4:0] rout_v [ROWS][COLS];
  logic [4:0] rout_r [ROWS][COLS];

  logic [ROWS-1:0] bm_wv, bm_done, bm_wgnt, bm_dgnt;
  logic [7:0]      bm_wslot [ROWS];
  logic [FW-1:0]   bm_widx  [ROWS];
  logic [DATA_W-1:0] bm_wdata [ROWS];
  logic [7:0]      bm_dslot [ROWS];

  for (genvar r = 0; r < ROWS; r++) begin : g_r
    for (genvar c = 0; c < COLS; c++) begin : g_c
      noc_router #(.ROW(r), .COL(c), .BUF_DEPTH(BUF_DEPTH)) u_rt (
        .clk, .rst_n,
        .in_flit(rin_f[r][c]), .in_valid(rin_v[r][c]), .in_ready(rin_r[r][c]),
        .out_flit(rout_f[r][c]), .out_valid(rout_v[r][c]), .out_ready(rout_r[r][c]));

      // EAST / WEST links
      if (c + 1 < COLS) begin : g_e
        assign rin_f[r][c][P_EAST]   = rout_f[r][c+1][P_WEST];
        assign rin_v[r][c][P_EAST]   = rout_v[r][c+1][P_WEST];
        assign rout_r[r][c+1][P_WEST] = rin_r[r][c][P_EAST];
        assign rin_f[r][c+1][P_WEST] = rout_f[r][c][P_EAST];
        assign rin_v[r][c+1][P_WEST] = rout_v[r][c][P_EAST];
        assign rout_r[r][c][P_EAST]  = rin_r[r][c+1][P_WEST];
      end else begin : g_eedge
        assign rin_f[r][c][P_EAST]  = '0;
        assign rin_v[r][c][P_EAST]  = 1'b0;
        assign rout_r[r][c][P_EAST] = 1'b0;
      end
      // NORTH / SOUTH links
      if (r + 1 < ROWS) begin : g_s
        assign rin_f[r][c][P_SOUTH]   = rout_f[r+1][c][P_NORTH];
        assign rin_v[r][c][P_SOUTH]   = rout_v[r+1][c][P_NORTH];
        assign rout_r[r+1][c][P_NORTH] = rin_r[r][c][P_SOUTH];
        assign rin_f[r+1][c][P_NORTH] = rout_f[r][c][P_SOUTH];
        assign rin_v[r+1][c][P_NORTH] = rout_v[r][c][P_SOUTH];
        assign rout_r[r][c][P_SOUTH]  = rin_r[r+1][c][P_NORTH];
      end else begin : g_sedge
        assign rin_f[r][c][P_SOUTH]  = '0;
        assign rin_v[r][c][P_SOUTH]  = 1'b0;
        assign rout_r[r][c][P_SOUTH] = 1'b0;
      end
      if (r == 0) begin : g_nedge
        assign rin_f[r][c][P_NORTH]  = '0;
        assign rin_v[r][c][P_NORTH]  = 1'b0;
        assign rout_r[r][c][P_NORTH] = 1'b0;
      end
      if (c == 0 && r == 0) begin : g_inj
        assign rin_f[r][c][P_WEST]  = inj_flit;
        assign rin_v[r][c][P_WEST]  = inj_valid;
        assign inj_ready            = rin_r[r][c][P_WEST];
        assign rout_r[r][c][P_WEST] = 1'b0;
      end else if (c == 0) begin : g_wedge
        assign rin_f[r][c][P_WEST]  = '0;
        assign rin_v[r][c][P_WEST]  = 1'b0;
        assign rout_r[r][c][P_WEST] = 1'b0;
      end

      // LOCAL port
      if (c == 0) begin : g_bm
        bm #(.AGC_FEATURES(AGC_FEATURES), .MAX_FEATURES(MAX_FEATURES)) u_bm (
          .clk, .rst_n,
          .in_flit(rout_f[r][c][P_LOCAL]), .in_valid(rout_v[r][c][P_LOCAL]),
          .in_ready(rout_r[r][c][P_LOCAL]),
          .wr_valid(bm_wv[r]), .wr_slot(bm_wslot[r]), .wr_idx(bm_widx[r]),
          .wr_data(bm_wdata[r]), .wr_ready(bm_wgnt[r]),
          .done(bm_done[r]), .done_slot(bm_dslot[r]), .done_ack(bm_dgnt[r]));
        assign rin_f[r][c][P_LOCAL] = '0;
        assign rin_v[r][c][P_LOCAL] = 1'b0;
      end else begin : g_agc
        agc #(.PREC(PREC), .AGC_FEATURES(AGC_FEATURES)) u_agc (
          .clk, .rst_n,
          .in_flit(rout_f[r][c][P_LOCAL]), .in_valid(rout_v[r][c][P_LOCAL]),
          .in_ready(rout_r[r][c][P_LOCAL]),
          .out_flit(rin_f[r][c][P_LOCAL]), .out_valid(rin_v[r][c][P_LOCAL]),
          .out_ready(rin_r[r][c][P_LOCAL]),
          .free(agc_free[r*(COLS-1) + c - 1]));
      end
    end
  end

  // shared Aggregation Buffer write port
  logic [RW-1:0] widx_g, didx_g;
  logic wgv, dgv;
  rr_arbiter #(.N(ROWS)) u_warb (
    .clk, .rst_n, .req(bm_wv), .hold(1'b0), .accept(1'b1),
    .gnt(bm_wgnt), .gnt_idx(widx_g), .gnt_valid(wgv));
  assign wr_valid = wgv;
  assign wr_slot  = bm_wslot[widx_g];
  assign wr_idx   = bm_widx[widx_g];
  assign wr_data  = bm_wdata[widx_g];

  rr_arbiter #(.N(ROWS)) u_darb (
    .clk, .rst_n, .req(bm_done), .hold(1'b0), .accept(1'b1),
    .gnt(bm_dgnt), .gnt_idx(didx_g), .gnt_valid(dgv));
  assign done_valid = dgv;
  assign done_slot  = bm_dslot[didx_g];
  assign done_bm    = didx_g;
endmodule
