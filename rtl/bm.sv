// bm: Buffering Manager, the collecting end of an aggregation mesh.
//
// Sits on the LOCAL port of a router in column 0. It receives result packets
// from the AGCs working on one node: a head naming the nodeslot, the slice
// number `chunk` and the slice count `nchunks`, then one body flit per
// feature, then a tail. Body k of slice c is written to the Aggregation Buffer
// at (nodeslot, c*AGC_FEATURES + k). When `nchunks` tails have arrived the
// node's aggregation is complete: `done` is raised with the nodeslot and held
// until `done_ack`. The Buffering Manager is then free for another node. It
// accepts a body flit only in a cycle in which its buffer write is granted.
// The paper names Buffering Managers that buffer aggregation results; how
// they count slices is this design's choice.
module bm
  import ample_pkg::*;
#(
  parameter int unsigned AGC_FEATURES = 16,
  parameter int unsigned MAX_FEATURES = 64,
  localparam int unsigned FW = $clog2(MAX_FEATURES)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  flit_t             in_flit,
  input  logic              in_valid,
  output logic              in_ready,
  // Aggregation Buffer write
  output logic              wr_valid,
  output logic [7:0]        wr_slot,
  output logic [FW-1:0]     wr_idx,
  output logic [DATA_W-1:0] wr_data,
  input  logic              wr_ready,
  // completion
  output logic              done,
  output logic [7:0]        done_slot,
  input  logic              done_ack
);
  head_t      hdr_q;
  logic [3:0] got_q;
  logic [FW:0] k_q;

  assign wr_valid = in_valid && !done && in_flit.ftype == FLIT_BODY;
  assign wr_slot  = hdr_q.slot;
  assign wr_idx   = FW'(32'(hdr_q.chunk) * AGC_FEATURES + 32'(k_q));
  assign wr_data  = in_flit.data;
  assign in_ready = !done && (in_flit.ftype != FLIT_BODY || wr_ready);
  assign done_slot = hdr_q.slot;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hdr_q <= '0; got_q <= '0; k_q <= '0; done <= 1'b0;
    end else if (done) begin
      if (done_ack) begin done <= 1'b0; got_q <= '0; end
    end else if (in_valid && in_ready) begin
      unique case (in_flit.ftype)
        FLIT_HEAD: begin hdr_q <= head_t'(in_flit.data); k_q <= '0; end
        FLIT_BODY: k_q <= k_q + 1'b1;
        default: begin
          got_q <= got_q + 4'd1;
          if (got_q + 4'd1 == {1'b0, hdr_q.nchunks}) done <= 1'b1;
        end
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) done && !done_ack |=> done);
endmodule
