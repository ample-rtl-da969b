// agm: Aggregation Manager, one per nodeslot.
//
// When the allocator programs it (`cfg_valid`) the AGM stores the node's
// allocation mask (which AGCs of its precision's mesh it owns), the row of
// its Buffering Manager, the feature and neighbour counts and the
// aggregation function. It then reads its Fetch Tag's Message Queue, which
// delivers each neighbour's embedding as in_features consecutive words, and
// for each neighbour sends one packet per slice: slice c (features
// c*AGC_FEATURES onward) goes to the AGC given by the c-th set bit of the
// mask. A packet is a head flit, one body flit per feature and a tail flit;
// the head of every packet for the last neighbour carries `last`. The AGM
// pulses `done` after the last tail and is then idle. AGC index a lies at
// mesh row a/(MESH_COLS-1), column a%(MESH_COLS-1)+1, column 0 holding the
// Buffering Managers. The paper gives the AGMs, the mask they hold and that
// they pass Feature Bank data to the AGCs over the network; slicing and
// packet order are this design's choices.
module agm
  import ample_pkg::*;
#(
  parameter int unsigned SLOT         = 0,
  parameter int unsigned MESH_COLS    = 4,
  parameter int unsigned NUM_AGC      = 12,
  parameter int unsigned AGC_FEATURES = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cfg_valid,
  input  precision_e         cfg_prec,
  input  logic [NUM_AGC-1:0] cfg_mask,
  input  logic [3:0]         cfg_bm_row,
  input  logic [2:0]         cfg_nchunks,
  input  agg_func_e          cfg_func,
  input  logic [15:0]        cfg_neighbours,
  input  logic [15:0]        cfg_features,
  output logic               busy,
  output precision_e         prec,
  output logic               done,
  // message queue from the Fetch Tag
  input  logic               msg_valid,
  input  logic [DATA_W-1:0]  msg_data,
  output logic               msg_ready,
  // flits towards the mesh of precision `prec`
  output flit_t              out_flit,
  output logic               out_valid,
  input  logic               out_ready
);
  typedef enum logic [1:0] {S_IDLE, S_HEAD, S_BODY, S_TAIL} state_e;
  state_e state_q;

  logic [NUM_AGC-1:0] mask_q;
  logic [3:0]  bm_row_q;
  logic [2:0]  nch_q, ch_q;
  agg_func_e   func_q;
  logic [15:0] nb_total_q, nb_q, feat_q, k_q;

  // destination AGC of slice ch_q: the ch_q-th set bit of the mask
  int unsigned dest;
  logic [15:0] len;
  always_comb begin
    int unsigned seen;
    seen = 0;
    dest = 0;
    for (int unsigned a = 0; a < NUM_AGC; a++) begin
      if (mask_q[a]) begin
        if (seen == 32'(ch_q)) dest = a;
        seen = seen + 1;
      end
    end
    len = feat_q - 16'(32'(ch_q) * AGC_FEATURES);
    if (len > 16'(AGC_FEATURES)) len = 16'(AGC_FEATURES);
  end

  always_comb begin
    head_t h;
    h.row     = 4'(dest / (MESH_COLS - 1));
    h.col     = 4'(dest % (MESH_COLS - 1) + 1);
    h.slot    = 8'(SLOT);
    h.last    = (nb_q == nb_total_q - 16'd1);
    h.func    = func_q;
    h.bm_row  = bm_row_q;
    h.chunk   = ch_q;
    h.nchunks = nch_q;
    h.rsvd    = '0;
    out_flit.ftype = FLIT_BODY;
    out_flit.data  = msg_data;
    out_valid      = 1'b0;
    msg_ready      = 1'b0;
    unique case (state_q)
      S_HEAD: begin out_flit.ftype = FLIT_HEAD; out_flit.data = h; out_valid = 1'b1; end
      S_BODY: begin out_valid = msg_valid; msg_ready = out_ready; end
      S_TAIL: begin out_flit.ftype = FLIT_TAIL; out_flit.data = '0; out_valid = 1'b1; end
      default: ;
    endcase
  end

  assign busy = (state_q != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE; mask_q <= '0; bm_row_q <= '0; nch_q <= '0; ch_q <= '0;
      func_q <= AGG_SUM; nb_total_q <= '0; nb_q <= '0; feat_q <= '0; k_q <= '0;
      prec <= PREC_FLOAT; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: if (cfg_valid) begin
          mask_q <= cfg_mask; bm_row_q <= cfg_bm_row; nch_q <= cfg_nchunks;
          func_q <= cfg_func; nb_total_q <= cfg_neighbours; feat_q <= cfg_features;
          prec <= cfg_prec; nb_q <= '0; ch_q <= '0; k_q <= '0;
          state_q <= S_HEAD;
        end
        S_HEAD: if (out_ready) begin state_q <= S_BODY; k_q <= '0; end
        S_BODY: if (out_valid && out_ready) begin
          k_q <= k_q + 16'd1;
          if (k_q + 16'd1 == len) state_q <= S_TAIL;
        end
        default: if (out_ready) begin // S_TAIL
          if (ch_q + 3'd1 == nch_q) begin
            ch_q <= '0;
            nb_q <= nb_q + 16'd1;
            if (nb_q + 16'd1 == nb_total_q) begin
              state_q <= S_IDLE;
              done    <= 1'b1;
            end else state_q <= S_HEAD;
          end else begin
            ch_q    <= ch_q + 3'd1;
            state_q <= S_HEAD;
          end
        end
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   cfg_valid |-> (cfg_neighbours != 0 && $countones(cfg_mask) == int'(cfg_nchunks)));
endmodule
