// fte: Feature Transformation Engine of one precision.
//
// An output-stationary systolic array of SYS_ROWS x SYS_COLS multiply-
// accumulate elements computes, for a batch of up to SYS_ROWS nodes,
// out[node][o] = sum_i W[o][i] * agg[node][i]. Row r of the array belongs to
// batch node r; column c to output feature tile*SYS_COLS + c. Aggregated
// features enter on the left, row r delayed by r cycles, and weights enter on
// top, column c delayed by c cycles, so operands meet diagonally; each
// element passes its operands right and down through registers and adds the
// product to its accumulator. With IN = in_features one tile takes 1 clear
// cycle, IN + SYS_ROWS + SYS_COLS - 2 streaming cycles, then one cycle per
// result word written (SYS_ROWS*SYS_COLS slots, skipping absent nodes and
// outputs); tiles repeat until all out_features are done. A batch is formed
// from `pending` nodeslots in round-robin order when the engine is idle and
// the Weight Bank is loaded; `pick` pulses for them, `done` after their last
// result is written. Results go to memory at out_ptr[slot] + 4*o through a
// valid/ready write port. Arithmetic is binary32 for PREC_FLOAT and 32-bit
// integer otherwise; no re-quantisation or activation is applied. The
// systolic array fed diagonally follows the paper; batch size, array size
// and tiling are this design's choices.
module fte
  import ample_pkg::*;
#(
  parameter precision_e  PREC      = PREC_FLOAT,
  parameter int unsigned NODESLOTS = 64,
  parameter int unsigned SYS_ROWS  = 4,
  parameter int unsigned SYS_COLS  = 4,
  parameter int unsigned MAX_IN    = 64,
  parameter int unsigned MAX_OUT   = 64,
  localparam int unsigned SW = $clog2(NODESLOTS),
  localparam int unsigned IW = $clog2(MAX_IN),
  localparam int unsigned OW = $clog2(MAX_OUT)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NODESLOTS-1:0] pending,
  input  logic                 weights_ready,
  output logic [NODESLOTS-1:0] pick,
  output logic [NODESLOTS-1:0] done,
  input  logic [15:0]          in_features,
  input  logic [15:0]          out_features,
  input  logic [ADDR_W-1:0]    out_ptr [NODESLOTS],
  // Aggregation Buffer read ports (one per array row)
  output logic [SW-1:0]        abf_slot [SYS_ROWS],
  output logic [IW-1:0]        abf_idx  [SYS_ROWS],
  input  logic [DATA_W-1:0]    abf_data [SYS_ROWS],
  // Weight Bank read ports (one per array column)
  output logic [OW-1:0]        w_out  [SYS_COLS],
  output logic [IW-1:0]        w_in   [SYS_COLS],
  input  logic [DATA_W-1:0]    w_data [SYS_COLS],
  // updated embedding write port
  output logic                 wr_valid,
  output logic [ADDR_W-1:0]    wr_addr,
  output logic [DATA_W-1:0]    wr_data,
  input  logic                 wr_ready,
  output logic                 busy
);
  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_STREAM, S_WRITE, S_DONE} state_e;
  state_e state_q;

  logic [SW-1:0]       slot_q [SYS_ROWS];
  logic [SYS_ROWS-1:0] rowv_q;
  logic [SW-1:0]       ptr_q;
  logic [15:0]         tile_q, t_q;
  logic [DATA_W-1:0]   acc_q [SYS_ROWS][SYS_COLS];
  logic [DATA_W-1:0]   a_q   [SYS_ROWS][SYS_COLS];
  logic [DATA_W-1:0]   b_q   [SYS_ROWS][SYS_COLS];
  logic [DATA_W-1:0]   a_in  [SYS_ROWS];
  logic [DATA_W-1:0]   b_in  [SYS_COLS];
  int unsigned         wr_r, wr_c;
  logic [15:0]         wcnt_q;

  assign busy = (state_q != S_IDLE);

  // batch selection: up to SYS_ROWS pending slots, round robin from ptr_q
  logic [SW-1:0]       sel_slot [SYS_ROWS];
  logic [SYS_ROWS-1:0] sel_v;
  logic [SW-1:0]       sel_next;
  always_comb begin
    int unsigned n;
    n = 0;
    sel_v    = '0;
    sel_next = ptr_q;
    for (int r = 0; r < int'(SYS_ROWS); r++) sel_slot[r] = '0;
    for (int unsigned i = 0; i < NODESLOTS; i++) begin
      int unsigned s;
      s = (int'(ptr_q) + i) % NODESLOTS;
      if (pending[s] && n < SYS_ROWS) begin
        sel_slot[n] = SW'(s);
        sel_v[n]    = 1'b1;
        sel_next    = SW'((s + 1) % NODESLOTS);
        n = n + 1;
      end
    end
  end

  // skewed operand feed: addresses
  always_comb begin
    for (int r = 0; r < int'(SYS_ROWS); r++) begin
      int k;
      k = int'(t_q) - r;
      abf_slot[r] = slot_q[r];
      abf_idx[r]  = IW'((k < 0) ? 0 : k);
    end
    for (int c = 0; c < int'(SYS_COLS); c++) begin
      int k;
      k = int'(t_q) - c;
      w_out[c] = OW'(int'(tile_q) * int'(SYS_COLS) + c);
      w_in[c]  = IW'((k < 0) ? 0 : k);
    end
  end

  // skewed operand feed: data, zero outside the valid window
  always_comb begin
    for (int r = 0; r < int'(SYS_ROWS); r++) begin
      int k;
      k = int'(t_q) - r;
      a_in[r] = (state_q == S_STREAM && rowv_q[r] && k >= 0 && k < int'(in_features))
                ? abf_data[r] : '0;
    end
    for (int c = 0; c < int'(SYS_COLS); c++) begin
      int k, o;
      k = int'(t_q) - c;
      o = int'(tile_q) * int'(SYS_COLS) + c;
      b_in[c] = (state_q == S_STREAM && k >= 0 && k < int'(in_features) &&
                 o < int'(out_features)) ? w_data[c] : '0;
    end
  end

  // write-back of one result per cycle
  always_comb begin
    int o;
    wr_r = 32'(wcnt_q) / SYS_COLS;
    wr_c = 32'(wcnt_q) % SYS_COLS;
    o    = int'(tile_q) * int'(SYS_COLS) + int'(wr_c);
    wr_valid = (state_q == S_WRITE) && rowv_q[wr_r] && (o < int'(out_features));
    wr_addr  = out_ptr[slot_q[wr_r]] + ADDR_W'(o) * 4;
    wr_data  = acc_q[wr_r][wr_c];
  end

  localparam int unsigned WTOT = SYS_ROWS * SYS_COLS;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE; rowv_q <= '0; ptr_q <= '0; tile_q <= '0; t_q <= '0;
      wcnt_q <= '0; pick <= '0; done <= '0;
      for (int r = 0; r < int'(SYS_ROWS); r++) begin
        slot_q[r] <= '0;
        for (int c = 0; c < int'(SYS_COLS); c++) begin
          acc_q[r][c] <= '0; a_q[r][c] <= '0; b_q[r][c] <= '0;
        end
      end
    end else begin
      pick <= '0;
      done <= '0;
      unique case (state_q)
        S_IDLE: if ((|pending) && weights_ready) begin
          for (int r = 0; r < int'(SYS_ROWS); r++) begin
            slot_q[r] <= sel_slot[r];
            if (sel_v[r]) pick[sel_slot[r]] <= 1'b1;
          end
          rowv_q  <= sel_v;
          ptr_q   <= sel_next;
          tile_q  <= '0;
          state_q <= S_CLEAR;
        end
        S_CLEAR: begin
          for (int r = 0; r < int'(SYS_ROWS); r++)
            for (int c = 0; c < int'(SYS_COLS); c++) begin
              acc_q[r][c] <= '0; a_q[r][c] <= '0; b_q[r][c] <= '0;
            end
          t_q     <= '0;
          state_q <= S_STREAM;
        end
        S_STREAM: begin
          for (int r = 0; r < int'(SYS_ROWS); r++)
            for (int c = 0; c < int'(SYS_COLS); c++) begin
              logic [DATA_W-1:0] a, b;
              a = (c == 0) ? a_in[r] : a_q[r][(c == 0) ? 0 : c-1];
              b = (r == 0) ? b_in[c] : b_q[(r == 0) ? 0 : r-1][c];
              a_q[r][c]   <= a;
              b_q[r][c]   <= b;
              acc_q[r][c] <= prec_add(PREC, acc_q[r][c], prec_mul(PREC, a, b));
            end
          t_q <= t_q + 16'd1;
          if (32'(t_q) + 1 == 32'(in_features) + SYS_ROWS + SYS_COLS - 2) begin
            state_q <= S_WRITE;
            wcnt_q  <= '0;
          end
        end
        S_WRITE: if (!wr_valid || wr_ready) begin
          wcnt_q <= wcnt_q + 16'd1;
          if (32'(wcnt_q) + 1 == WTOT) begin
            tile_q <= tile_q + 16'd1;
            if ((32'(tile_q) + 1) * SYS_COLS >= 32'(out_features)) state_q <= S_DONE;
            else state_q <= S_CLEAR;
          end
        end
        default: begin // S_DONE
          for (int r = 0; r < int'(SYS_ROWS); r++)
            if (rowv_q[r]) done[slot_q[r]] <= 1'b1;
          state_q <= S_IDLE;
        end
      endcase
    end
  end
endmodule
