// noc_router: five-port wormhole router of the Aggregation Engine mesh.
//
// Ports are LOCAL, NORTH, EAST, SOUTH and WEST (ample_pkg::P_*). Each input
// has a FIFO of BUF_DEPTH flits. A head flit at the front of an input FIFO is
// routed by dimension order: first along the row (EAST/WEST) until the
// destination column is reached, then along the column (NORTH/SOUTH), then
// ejected on LOCAL. Each output has a round-robin arbiter; the input that wins
// with a head flit keeps the output until its tail flit has passed (wormhole
// switching), and that input's body and tail flits follow the remembered
// route. One flit per output per cycle; a flit moves when the downstream
// ready is high. Dimension-order routing and head/body/tail packets follow
// the paper; buffer depth and arbitration are this design's choices.
module noc_router
  import ample_pkg::*;
#(
  parameter int unsigned ROW       = 0,
  parameter int unsigned COL       = 0,
  parameter int unsigned BUF_DEPTH = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  flit_t in_flit   [5],
  input  logic  [4:0] in_valid,
  output logic  [4:0] in_ready,
  output flit_t out_flit  [5],
  output logic  [4:0] out_valid,
  input  logic  [4:0] out_ready
);
  flit_t      f_head  [5];
  logic [4:0] f_empty, f_full, f_pop;
  logic [2:0] route   [5];
  logic [2:0] route_q [5];

  function automatic logic [2:0] xy_route(input head_t h);
    if (int'(h.col) > int'(COL)) return 3'(P_EAST);
    if (int'(h.col) < int'(COL)) return 3'(P_WEST);
    if (int'(h.row) > int'(ROW)) return 3'(P_SOUTH);
    if (int'(h.row) < int'(ROW)) return 3'(P_NORTH);
    return 3'(P_LOCAL);
  endfunction

  for (genvar i = 0; i < 5; i++) begin : g_in
    logic [$bits(flit_t)-1:0] dout;
    logic [$clog2(BUF_DEPTH):0] cnt;
    sync_fifo #(.WIDTH($bits(flit_t)), .DEPTH(BUF_DEPTH)) u_buf (
      .clk, .rst_n, .push(in_valid[i]), .din(in_flit[i]), .pop(f_pop[i]),
      .dout, .empty(f_empty[i]), .full(f_full[i]), .count(cnt));
    assign f_head[i]   = flit_t'(dout);
    assign in_ready[i] = !f_full[i];
    assign route[i]    = (f_head[i].ftype == FLIT_HEAD) ? xy_route(head_t'(f_head[i].data))
                                                        : route_q[i];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) route_q[i] <= '0;
      else if (f_pop[i] && f_head[i].ftype == FLIT_HEAD) route_q[i] <= route[i];
    end
  end

  logic [4:0] o_gnt   [5];
  logic [2:0] o_idx   [5];
  logic [4:0] o_gv, o_busy_q, o_fire;

  for (genvar o = 0; o < 5; o++) begin : g_out
    logic [4:0] req;
    for (genvar i = 0; i < 5; i++) begin : g_req
      assign req[i] = !f_empty[i] && (int'(route[i]) == o);
    end
    rr_arbiter #(.N(5)) u_arb (
      .clk, .rst_n, .req, .hold(o_busy_q[o]), .accept(o_fire[o]),
      .gnt(o_gnt[o]), .gnt_idx(o_idx[o]), .gnt_valid(o_gv[o]));
    // a new packet may only start on an idle output with a head flit
    assign out_valid[o] = o_gv[o] && (o_busy_q[o] || f_head[o_idx[o]].ftype == FLIT_HEAD);
    assign out_flit[o]  = f_head[o_idx[o]];
    assign o_fire[o]    = out_valid[o] && out_ready[o];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) o_busy_q[o] <= 1'b0;
      else if (o_fire[o]) o_busy_q[o] <= (out_flit[o].ftype != FLIT_TAIL);
    end
  end

  always_comb begin
    f_pop = '0;
    for (int o = 0; o < 5; o++)
      if (o_fire[o]) f_pop[o_idx[o]] = 1'b1;
  end
endmodule
