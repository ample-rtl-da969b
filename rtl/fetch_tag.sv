// fetch_tag: per-nodeslot storage and fetch engine of the Feature Bank.
//
// A Fetch Tag serves one nodeslot. After `start` it fetches in two stages:
// (1) the node's neighbour IDs are read as bursts from the adjacency list
// pointer into the Address Queue; (2) each ID popped from the Address Queue
// is turned into the address of that neighbour's embedding
// (feature_base + id * in_features * 4) and its in_features words are read
// into the Message Queue. The Aggregation Manager pops words from the Message
// Queue in order, one neighbour embedding after another.
//
// Partial response: `agg_ready` rises, and stays high until the node is
// drained, as soon as either every neighbour has been fetched or the Message
// Queue cannot take another embedding. In the second case the node's degree
// exceeds the tag's capacity; aggregation starts on what is there and the
// tag keeps fetching the rest as the AGE frees space. `partial_evt` pulses
// when that happens.
//
// Memory side: one outstanding burst at a time. The tag raises mreq_valid
// with a byte address and a length (beats - 1); mreq_ready means its group
// arbiter granted it. Beats then arrive on mresp_* and are always accepted,
// because space was reserved before the request. Stage 2 requests take
// priority over stage 1. Burst sizes, queue depths and the address formula
// are this design's choices; the two queues, the two stages and the partial
// response follow the paper.
module fetch_tag
  import ample_pkg::*;
#(
  parameter int unsigned ADDR_Q_DEPTH = 16,
  parameter int unsigned MSG_Q_DEPTH  = 256,
  parameter int unsigned MAX_FEATURES = 64,
  parameter int unsigned ID_BURST     = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // nodeslot programming
  input  logic              start,
  input  logic [ADDR_W-1:0] adj_ptr,
  input  logic [15:0]       neighbours,
  input  logic [15:0]       in_features,
  input  logic [ADDR_W-1:0] feature_base,
  // status
  output logic              busy,
  output logic              agg_ready,
  output logic              partial_evt,
  // memory request / response
  output logic              mreq_valid,
  output logic [ADDR_W-1:0] mreq_addr,
  output logic [7:0]        mreq_len,
  input  logic              mreq_ready,
  input  logic              mresp_valid,
  input  logic [DATA_W-1:0] mresp_data,
  input  logic              mresp_last,
  // message queue read side (to Aggregation Manager)
  output logic              msg_valid,
  output logic [DATA_W-1:0] msg_data,
  input  logic              msg_ready
);
  localparam int unsigned AQW = $clog2(ADDR_Q_DEPTH) + 1;
  localparam int unsigned MQW = $clog2(MSG_Q_DEPTH) + 1;

  typedef enum logic [1:0] {OUT_NONE, OUT_IDS, OUT_FEAT} outst_e;

  logic [ADDR_W-1:0] adj_q, fbase_q;
  logic [15:0] nb_q, feat_q;
  logic [15:0] ids_req_q;     // neighbour IDs requested so far
  logic [15:0] feat_req_q;    // neighbour embeddings requested so far
  logic [15:0] feat_done_q;   // neighbour embeddings fully received
  logic [31:0] words_popped_q;
  outst_e      outst_q;
  logic        ready_q;

  // queues
  logic aq_push, aq_pop, aq_empty, aq_full;
  logic [DATA_W-1:0] aq_dout;
  logic [AQW-1:0] aq_count;
  logic mq_push, mq_empty, mq_full;
  logic [MQW-1:0] mq_count;

  sync_fifo #(.WIDTH(DATA_W), .DEPTH(ADDR_Q_DEPTH)) u_addr_q (
    .clk, .rst_n, .push(aq_push), .din(mresp_data), .pop(aq_pop),
    .dout(aq_dout), .empty(aq_empty), .full(aq_full), .count(aq_count));

  sync_fifo #(.WIDTH(DATA_W), .DEPTH(MSG_Q_DEPTH)) u_msg_q (
    .clk, .rst_n, .push(mq_push), .din(mresp_data), .pop(msg_valid && msg_ready),
    .dout(msg_data), .empty(mq_empty), .full(mq_full), .count(mq_count));

  assign msg_valid = !mq_empty;
  assign aq_push   = mresp_valid && (outst_q == OUT_IDS);
  assign mq_push   = mresp_valid && (outst_q == OUT_FEAT);

  // request selection
  logic [15:0] ids_left, id_room, id_len;
  logic        want_feat, want_ids;
  always_comb begin
    ids_left  = nb_q - ids_req_q;
    id_room   = 16'(ADDR_Q_DEPTH) - 16'(aq_count);
    id_len    = ids_left;
    if (id_len > id_room)          id_len = id_room;
    if (id_len > 16'(ID_BURST))    id_len = 16'(ID_BURST);
    want_feat = busy && (outst_q == OUT_NONE) && !aq_empty &&
                (32'(MSG_Q_DEPTH) - 32'(mq_count) >= 32'(feat_q));
    want_ids  = busy && (outst_q == OUT_NONE) && (ids_left != 0) && (id_len != 0);
    mreq_valid = want_feat || want_ids;
    if (want_feat) begin
      mreq_addr = fbase_q + ADDR_W'(aq_dout) * ADDR_W'(feat_q) * 4;
      mreq_len  = 8'(feat_q - 16'd1);
    end else begin
      mreq_addr = adj_q + ADDR_W'(ids_req_q) * 4;
      mreq_len  = 8'(id_len - 16'd1);
    end
  end
  assign aq_pop = mreq_valid && mreq_ready && want_feat;

  // all embeddings received or the queue cannot take another one
  logic all_fetched, mq_no_room;
  assign all_fetched = (feat_done_q == nb_q);
  // blocked: nothing in flight and no room for the next embedding
  assign mq_no_room  = (outst_q == OUT_NONE) &&
                       (32'(MSG_Q_DEPTH) - 32'(mq_count) < 32'(feat_q));
  assign agg_ready   = ready_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; adj_q <= '0; fbase_q <= '0; nb_q <= '0; feat_q <= '0;
      ids_req_q <= '0; feat_req_q <= '0; feat_done_q <= '0; words_popped_q <= '0;
      outst_q <= OUT_NONE; ready_q <= 1'b0; partial_evt <= 1'b0;
    end else begin
      partial_evt <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; adj_q <= adj_ptr; fbase_q <= feature_base;
        nb_q <= neighbours; feat_q <= in_features;
        ids_req_q <= '0; feat_req_q <= '0; feat_done_q <= '0; words_popped_q <= '0;
        outst_q <= OUT_NONE; ready_q <= 1'b0;
      end else if (busy) begin
        if (mreq_valid && mreq_ready) begin
          if (want_feat) begin
            outst_q    <= OUT_FEAT;
            feat_req_q <= feat_req_q + 16'd1;
          end else begin
            outst_q   <= OUT_IDS;
            ids_req_q <= ids_req_q + id_len;
          end
        end
        if (mresp_valid && mresp_last) begin
          outst_q <= OUT_NONE;
          if (outst_q == OUT_FEAT) feat_done_q <= feat_done_q + 16'd1;
        end
        if (!ready_q && (all_fetched || mq_no_room)) begin
          ready_q     <= 1'b1;
          partial_evt <= !all_fetched;
        end
        if (msg_valid && msg_ready) words_popped_q <= words_popped_q + 32'd1;
        // finished when every word of every neighbour has been handed over
        if (all_fetched && words_popped_q == 32'(nb_q) * 32'(feat_q)) begin
          busy    <= 1'b0;
          ready_q <= 1'b0;
        end
      end
    end
  end

  // A response may only arrive while a burst is outstanding.
  assert property (@(posedge clk) disable iff (!rst_n) mresp_valid |-> outst_q != OUT_NONE);
endmodule
