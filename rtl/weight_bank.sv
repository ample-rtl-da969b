// weight_bank: on-chip copy of the current layer's weights.
//
// On `load` the bank reads, through its own AXI4 read master, one weight
// matrix per precision: for precision p, output feature o and input feature
// i the word sits at weight_base + ((p*out_features + o)*in_features + i)*4.
// Rows are fetched as bursts of in_features beats. `busy` is high until the
// last word has landed. The Feature Transformation Engines read the store
// combinationally: one port per systolic-array column per precision, each
// addressed by (output feature, input feature). Float weights are binary32,
// integer weights sign-extended words. The paper only says the Weight Bank
// holds layer weights fetched by the Prefetcher; the memory layout, one
// matrix per precision and the read ports are this design's choices.
module weight_bank
  import ample_pkg::*;
#(
  parameter int unsigned NUM_PREC     = 3,
  parameter int unsigned MAX_IN       = 64,
  parameter int unsigned MAX_OUT      = 64,
  parameter int unsigned RD_PORTS     = 4,
  localparam int unsigned IW = $clog2(MAX_IN),
  localparam int unsigned OW = $clog2(MAX_OUT)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              load,
  input  logic [ADDR_W-1:0] weight_base,
  input  logic [15:0]       in_features,
  input  logic [15:0]       out_features,
  output logic              busy,
  // read ports
  input  logic [OW-1:0]     rd_out  [NUM_PREC][RD_PORTS],
  input  logic [IW-1:0]     rd_in   [NUM_PREC][RD_PORTS],
  output logic [DATA_W-1:0] rd_data [NUM_PREC][RD_PORTS],
  // AXI4 read port
  output logic [ADDR_W-1:0] m_araddr,
  output logic [7:0]        m_arlen,
  output logic [2:0]        m_arsize,
  output logic [1:0]        m_arburst,
  output logic              m_arvalid,
  input  logic              m_arready,
  input  logic [DATA_W-1:0] m_rdata,
  input  logic [1:0]        m_rresp,
  input  logic              m_rlast,
  input  logic              m_rvalid,
  output logic              m_rready
);
  logic [DATA_W-1:0] mem [NUM_PREC][MAX_OUT][MAX_IN];

  logic [ADDR_W-1:0] base_q;
  logic [15:0] in_q, out_q;
  logic [15:0] req_row_q;          // rows (p*out + o) requested
  logic [15:0] wr_row_q, wr_col_q; // next word to write
  logic        outst_q;
  logic        rq_valid, rq_ready, rs_valid, rs_last;
  logic [DATA_W-1:0] rs_data;
  logic [15:0] total_rows;

  assign total_rows = 16'(NUM_PREC) * out_q;
  assign rq_valid   = busy && !outst_q && (req_row_q < total_rows);

  axi_read_master u_rm (
    .clk, .rst_n,
    .req_valid(rq_valid), .req_addr(base_q + ADDR_W'(req_row_q) * ADDR_W'(in_q) * 4),
    .req_len(8'(in_q - 16'd1)), .req_ready(rq_ready),
    .resp_valid(rs_valid), .resp_data(rs_data), .resp_last(rs_last),
    .m_araddr, .m_arlen, .m_arsize, .m_arburst, .m_arvalid, .m_arready,
    .m_rdata, .m_rresp, .m_rlast, .m_rvalid, .m_rready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; base_q <= '0; in_q <= 16'd1; out_q <= '0;
      req_row_q <= '0; wr_row_q <= '0; wr_col_q <= '0; outst_q <= 1'b0;
    end else if (load && !busy) begin
      busy <= 1'b1; base_q <= weight_base; in_q <= in_features; out_q <= out_features;
      req_row_q <= '0; wr_row_q <= '0; wr_col_q <= '0; outst_q <= 1'b0;
    end else if (busy) begin
      if (rq_valid && rq_ready) begin
        outst_q   <= 1'b1;
        req_row_q <= req_row_q + 16'd1;
      end
      if (rs_valid) begin
        if (rs_last) begin
          outst_q  <= 1'b0;
          wr_col_q <= '0;
          wr_row_q <= wr_row_q + 16'd1;
          if (wr_row_q + 16'd1 == total_rows) busy <= 1'b0;
        end else begin
          wr_col_q <= wr_col_q + 16'd1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (busy && rs_valid) begin
      mem[int'(wr_row_q) / int'(out_q)][int'(wr_row_q) % int'(out_q)][int'(wr_col_q)] <= rs_data;
    end
  end

  always_comb begin
    for (int p = 0; p < int'(NUM_PREC); p++)
      for (int c = 0; c < int'(RD_PORTS); c++)
        rd_data[p][c] = mem[p][rd_out[p][c]][rd_in[p][c]];
  end
endmodule
