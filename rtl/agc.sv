// agc: Aggregation Core, one processing element of an aggregation mesh.
//
// An AGC works in one precision (parameter PREC) and handles one slice of up
// to AGC_FEATURES features of one node at a time. It receives data packets on
// its router's LOCAL port: a head flit (ample_pkg::head_t), one body flit per
// feature of the slice for one neighbour, and a tail flit. Body k is added
// into accumulator k (binary32 add for float, 32-bit integer add otherwise);
// each tail counts one neighbour. The first packet of a node clears the
// accumulators. After the tail of the packet whose head has `last` set, the
// core sends a result packet to the Buffering Manager at (bm_row, column 0):
// a head, one body per accumulated feature (divided by the neighbour count
// when the function is mean), and a tail. It then pulses `free` so the
// allocator can give it to another node. One flit per cycle in both
// directions. The paper says AGCs are single-precision PEs on a NoC that
// aggregate neighbour features; the packet contents and the result path are
// this design's choices.
module agc
  import ample_pkg::*;
#(
  parameter precision_e  PREC         = PREC_FLOAT,
  parameter int unsigned AGC_FEATURES = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  // from router LOCAL output
  input  flit_t in_flit,
  input  logic  in_valid,
  output logic  in_ready,
  // to router LOCAL input
  output flit_t out_flit,
  output logic  out_valid,
  input  logic  out_ready,
  output logic  free
);
  localparam int unsigned KW = $clog2(AGC_FEATURES) + 1;
  typedef enum logic [1:0] {S_RECV, S_HEAD, S_BODY, S_TAIL} state_e;

  state_e      state_q;
  logic [DATA_W-1:0] acc_q [AGC_FEATURES];
  head_t       hdr_q;
  logic        active_q, last_q;
  logic [KW-1:0] k_q, len_q;
  logic [15:0] nb_q;

  head_t in_hdr;
  assign in_hdr   = head_t'(in_flit.data);
  assign in_ready = (state_q == S_RECV);

  always_comb begin
    head_t h;
    h        = hdr_q;
    h.row    = hdr_q.bm_row;
    h.col    = '0;
    h.last   = 1'b1;
    out_valid = (state_q != S_RECV);
    out_flit.ftype = FLIT_BODY;
    out_flit.data  = '0;
    unique case (state_q)
      S_HEAD: begin out_flit.ftype = FLIT_HEAD; out_flit.data = h; end
      S_BODY: out_flit.data = (hdr_q.func == AGG_MEAN)
                              ? prec_div_count(PREC, acc_q[k_q[KW-2:0]], nb_q)
                              : acc_q[k_q[KW-2:0]];
      S_TAIL: out_flit.ftype = FLIT_TAIL;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_RECV; active_q <= 1'b0; last_q <= 1'b0;
      k_q <= '0; len_q <= '0; nb_q <= '0; hdr_q <= '0; free <= 1'b0;
      for (int k = 0; k < int'(AGC_FEATURES); k++) acc_q[k] <= '0;
    end else begin
      free <= 1'b0;
      unique case (state_q)
        S_RECV: if (in_valid) begin
          unique case (in_flit.ftype)
            FLIT_HEAD: begin
              hdr_q  <= in_hdr;
              last_q <= in_hdr.last;
              k_q    <= '0;
              if (!active_q) begin
                active_q <= 1'b1;
                nb_q     <= '0;
                for (int k = 0; k < int'(AGC_FEATURES); k++) acc_q[k] <= '0;
              end
            end
            FLIT_BODY: begin
              acc_q[k_q[KW-2:0]] <= prec_add(PREC, acc_q[k_q[KW-2:0]], in_flit.data);
              k_q <= k_q + 1'b1;
            end
            default: begin // tail
              nb_q  <= nb_q + 16'd1;
              len_q <= k_q;
              if (last_q) state_q <= S_HEAD;
            end
          endcase
        end
        S_HEAD: if (out_ready) begin state_q <= S_BODY; k_q <= '0; end
        S_BODY: if (out_ready) begin
          k_q <= k_q + 1'b1;
          if (k_q + 1'b1 == len_q) state_q <= S_TAIL;
        end
        default: if (out_ready) begin // S_TAIL
          state_q  <= S_RECV;
          active_q <= 1'b0;
          free     <= 1'b1;
        end
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   in_valid && in_ready && in_flit.ftype == FLIT_BODY |-> k_q < KW'(AGC_FEATURES));
endmodule
