// rr_arbiter: round-robin arbiter with grant hold.
//
// Grants one of N requesters per cycle. The search starts just after the
// requester that won last time, so every requester is served within N grants.
// `accept` tells the arbiter that the current grant was used; only then does
// the priority pointer move. While `hold` is high the last winner keeps the
// grant as long as it still requests, which lets a caller keep a resource for
// a whole packet or burst. Grant is combinational from req; the pointer is a
// register. While hold is high nobody else is granted, even in a cycle in
// which the holder does not request. Round-robin arbitration is what the paper uses for shared
// resources in the NID and for the HBM port of each Fetch Tag group; the hold
// input is this design's addition for wormhole packets.
module rr_arbiter #(
  parameter int unsigned N = 4,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  req,
  input  logic          hold,
  input  logic          accept,
  output logic [N-1:0]  gnt,
  output logic [IW-1:0] gnt_idx,
  output logic          gnt_valid
);
  logic [IW-1:0] last_q;

  always_comb begin
    int unsigned idx;
    idx       = 0;
    gnt_valid = 1'b0;
    gnt_idx   = last_q;
    if (hold) begin
      gnt_valid = req[last_q];
    end else begin
      for (int unsigned i = 1; i <= N; i++) begin
        idx = (int'(last_q) + i) % N;
        if (!gnt_valid && req[idx]) begin
          gnt_valid = 1'b1;
          gnt_idx   = IW'(idx);
        end
      end
    end
    gnt = '0;
    if (gnt_valid) gnt[gnt_idx] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    last_q <= IW'(N - 1);
    else if (accept && gnt_valid)  last_q <= gnt_idx;
  end
endmodule
