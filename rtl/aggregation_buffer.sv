// aggregation_buffer: storage between the Aggregation and Transformation
// Engines.
//
// One row of MAX_FEATURES words per nodeslot. Each precision's aggregation
// mesh has a write port (written by its Buffering Managers, one word per
// cycle), and each precision's Transformation Engine has RD_PORTS read ports,
// one per systolic-array row. Reads are combinational. A nodeslot's row is
// written by exactly one mesh at a time and read only after that node's
// aggregation has completed, so ports never collide on a row. The paper
// describes the buffer's role only; row-per-nodeslot organisation and the
// port counts are this design's choices.
module aggregation_buffer
  import ample_pkg::*;
#(
  parameter int unsigned NODESLOTS    = 64,
  parameter int unsigned MAX_FEATURES = 64,
  parameter int unsigned NUM_PREC     = 3,
  parameter int unsigned RD_PORTS     = 4,
  localparam int unsigned SW = $clog2(NODESLOTS),
  localparam int unsigned FW = $clog2(MAX_FEATURES)
) (
  input  logic                clk,
  input  logic [NUM_PREC-1:0] wr_valid,
  input  logic [SW-1:0]       wr_slot [NUM_PREC],
  input  logic [FW-1:0]       wr_idx  [NUM_PREC],
  input  logic [DATA_W-1:0]   wr_data [NUM_PREC],
  input  logic [SW-1:0]       rd_slot [NUM_PREC][RD_PORTS],
  input  logic [FW-1:0]       rd_idx  [NUM_PREC][RD_PORTS],
  output logic [DATA_W-1:0]   rd_data [NUM_PREC][RD_PORTS]
);
  logic [DATA_W-1:0] mem [NODESLOTS][MAX_FEATURES];

  always_ff @(posedge clk) begin
    for (int p = 0; p < int'(NUM_PREC); p++)
      if (wr_valid[p]) mem[wr_slot[p]][wr_idx[p]] <= wr_data[p];
  end

  always_comb begin
    for (int p = 0; p < int'(NUM_PREC); p++)
      for (int r = 0; r < int'(RD_PORTS); r++)
        rd_data[p][r] = mem[rd_slot[p][r]][rd_idx[p][r]];
  end
endmodule
