// nid: Node Instruction Decoder, the host-facing scoreboard of nodeslots.
//
// An AXI-Lite slave register bank. Global and layer registers (byte
// addresses):
//   0x000 IN_FEATURES   0x004 OUT_FEATURES   0x008 AGG_FUNC (0 sum, 1 mean)
//   0x00C FEATURE_BASE  0x010 WEIGHT_BASE  0x0F0 FEATURE_STRIDE (bytes between
//         the embedding tables of consecutive precisions)
//   0x014 CTRL   write bit0=1 starts the Weight Bank load; read bit0 = loading
//   0x018 + 4k AVAILABLE word k (read only, bit = nodeslot is free)
//   0x018 + 4*NW + 4k IRQ word k (bit = nodeslot finished; write 1 to clear)
//     where NW = ceil(NODESLOTS/32)
// Nodeslot s occupies 0x100 + 0x20*s:
//   +0x00 NODE_ID  +0x04 PRECISION (0 float, 1 int8, 2 int4)  +0x08 NEIGHBOURS
//   +0x0C ADJ_PTR  +0x10 OUT_PTR   +0x14 LAUNCH (write 1)      +0x18 STATE (ro)
// The host fills a free nodeslot and writes LAUNCH; the slot leaves the
// available mask and walks through PREFETCH (its Fetch Tag is started),
// AGGREGATION (granted AGE resources), TRANSFORMATION (result in the
// Aggregation Buffer, waiting for or inside the FTE) and back to EMPTY, at
// which point its IRQ bit is set and `irq` is raised. Slots waiting for the
// AGE are offered to it one per cycle by a round-robin arbiter; a slot the
// AGE refuses is retried on a later turn. The nodeslot fields, the states,
// the available mask and round-robin service follow the paper; the register
// map, write-one-to-launch and the interrupt register are this design's
// choices. Writes take one cycle and ignore byte strobes; a write to a
// nodeslot field is ignored unless the slot is EMPTY.
module nid
  import ample_pkg::*;
#(
  parameter int unsigned NODESLOTS = 64,
  parameter int unsigned AXI_AW    = 12,
  localparam int unsigned SW = $clog2(NODESLOTS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // AXI-Lite slave
  input  logic [AXI_AW-1:0]    s_awaddr,
  input  logic                 s_awvalid,
  output logic                 s_awready,
  input  logic [31:0]          s_wdata,
  input  logic [3:0]           s_wstrb,
  input  logic                 s_wvalid,
  output logic                 s_wready,
  output logic [1:0]           s_bresp,
  output logic                 s_bvalid,
  input  logic                 s_bready,
  input  logic [AXI_AW-1:0]    s_araddr,
  input  logic                 s_arvalid,
  output logic                 s_arready,
  output logic [31:0]          s_rdata,
  output logic [1:0]           s_rresp,
  output logic                 s_rvalid,
  input  logic                 s_rready,
  output logic                 irq,
  // layer configuration
  output logic [15:0]          in_features,
  output logic [15:0]          out_features,
  output agg_func_e            agg_func,
  output logic [ADDR_W-1:0]    feature_base,
  output logic [ADDR_W-1:0]    feature_stride,
  output logic [ADDR_W-1:0]    weight_base,
  output logic                 weight_load,
  input  logic                 weight_busy,
  // nodeslot fields
  output precision_e           slot_prec       [NODESLOTS],
  output logic [15:0]          slot_neighbours [NODESLOTS],
  output logic [ADDR_W-1:0]    slot_adj_ptr    [NODESLOTS],
  output logic [ADDR_W-1:0]    slot_out_ptr    [NODESLOTS],
  output ns_state_e            slot_state      [NODESLOTS],
  output logic [NODESLOTS-1:0] available,
  // Prefetcher
  output logic [NODESLOTS-1:0] ft_start,
  input  logic [NODESLOTS-1:0] ft_agg_ready,
  // Aggregation Engine
  output logic                 age_req_valid,
  output logic [SW-1:0]        age_req_slot,
  input  logic                 age_req_ready,
  input  logic [NODESLOTS-1:0] age_done,
  // Transformation Engine
  output logic [NODESLOTS-1:0] fte_pending,
  input  logic [NODESLOTS-1:0] fte_pick,
  input  logic [NODESLOTS-1:0] fte_done
);
  localparam int unsigned NW = (NODESLOTS + 31) / 32;
  localparam int unsigned A_AVAIL = 32'h18;
  localparam int unsigned A_IRQ   = 32'h18 + 4 * NW;

  logic [31:0]          node_id_q [NODESLOTS];
  logic [NODESLOTS-1:0] picked_q, irq_q;
  logic [NW*32-1:0]     avail_ext, irq_ext;

  // ------------------------------------------------------------ requests
  logic [NODESLOTS-1:0] agg_req;
  logic                 arb_v;
  logic [NODESLOTS-1:0] arb_gnt;
  for (genvar s = 0; s < NODESLOTS; s++) begin : g_s
    assign available[s]   = (slot_state[s] == NS_EMPTY);
    assign agg_req[s]     = (slot_state[s] == NS_PREFETCH) && ft_agg_ready[s];
    assign fte_pending[s] = (slot_state[s] == NS_TRANSFORMATION) && !picked_q[s];
  end
  assign avail_ext = (NW*32)'(available);
  assign irq_ext   = (NW*32)'(irq_q);
  assign irq       = |irq_q;

  rr_arbiter #(.N(NODESLOTS)) u_arb (
    .clk, .rst_n, .req(agg_req), .hold(1'b0), .accept(arb_v),
    .gnt(arb_gnt), .gnt_idx(age_req_slot), .gnt_valid(arb_v));
  assign age_req_valid = arb_v;

  // ----------------------------------------------------------- AXI-Lite
  logic do_wr;
  assign do_wr     = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = do_wr;
  assign s_wready  = do_wr;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign s_arready = s_arvalid && !s_rvalid;

  int unsigned wa, ra, ws, rs, wf, rf;
  assign wa = 32'(s_awaddr);
  assign ra = 32'(s_araddr);
  assign ws = (wa - 32'h100) / 32'h20;
  assign wf = (wa - 32'h100) % 32'h20;
  assign rs = (ra - 32'h100) / 32'h20;
  assign rf = (ra - 32'h100) % 32'h20;

  logic [31:0] rd_val;
  always_comb begin
    rd_val = '0;
    if (ra >= 32'h100 && rs < NODESLOTS) begin
      unique case (rf)
        32'h00: rd_val = node_id_q[rs];
        32'h04: rd_val = 32'(slot_prec[rs]);
        32'h08: rd_val = 32'(slot_neighbours[rs]);
        32'h0C: rd_val = slot_adj_ptr[rs];
        32'h10: rd_val = slot_out_ptr[rs];
        32'h18: rd_val = 32'(slot_state[rs]);
        default: rd_val = '0;
      endcase
    end else if (ra >= A_AVAIL && ra < A_AVAIL + 4*NW) begin
      rd_val = avail_ext[32*((ra - A_AVAIL)/4) +: 32];
    end else if (ra >= A_IRQ && ra < A_IRQ + 4*NW) begin
      rd_val = irq_ext[32*((ra - A_IRQ)/4) +: 32];
    end else begin
      unique case (ra)
        32'h000: rd_val = 32'(in_features);
        32'h004: rd_val = 32'(out_features);
        32'h008: rd_val = 32'(agg_func);
        32'h00C: rd_val = feature_base;
        32'h010: rd_val = weight_base;
        32'h014: rd_val = 32'(weight_busy);
        32'h0F0: rd_val = feature_stride;
        default: rd_val = '0;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_bvalid <= 1'b0; s_rvalid <= 1'b0; s_rdata <= '0;
      in_features <= 16'd1; out_features <= 16'd1; agg_func <= AGG_SUM;
      feature_base <= '0; feature_stride <= '0; weight_base <= '0; weight_load <= 1'b0;
      ft_start <= '0; picked_q <= '0; irq_q <= '0;
      for (int s = 0; s < int'(NODESLOTS); s++) begin
        node_id_q[s] <= '0; slot_prec[s] <= PREC_FLOAT; slot_neighbours[s] <= '0;
        slot_adj_ptr[s] <= '0; slot_out_ptr[s] <= '0; slot_state[s] <= NS_EMPTY;
      end
    end else begin
      weight_load <= 1'b0;
      ft_start    <= '0;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (s_arready) begin
        s_rvalid <= 1'b1;
        s_rdata  <= rd_val;
      end

      // accelerator side state machine
      for (int s = 0; s < int'(NODESLOTS); s++) begin
        unique case (slot_state[s])
          NS_PREFETCH:
            if (age_req_valid && age_req_ready && int'(age_req_slot) == s) slot_state[s] <= NS_AGGREGATION;
          NS_AGGREGATION:
            if (age_done[s]) begin
              slot_state[s] <= NS_TRANSFORMATION;
              picked_q[s]   <= 1'b0;
            end
          NS_TRANSFORMATION: begin
            if (fte_pick[s]) picked_q[s] <= 1'b1;
            if (fte_done[s]) begin
              slot_state[s] <= NS_EMPTY;
              irq_q[s]      <= 1'b1;
            end
          end
          default: ;
        endcase
      end

      // host writes
      if (do_wr) begin
        s_bvalid <= 1'b1;
        if (wa >= 32'h100 && ws < NODESLOTS) begin
          if (slot_state[ws] == NS_EMPTY) begin
            unique case (wf)
              32'h00: node_id_q[ws]       <= s_wdata;
              32'h04: slot_prec[ws]       <= precision_e'(s_wdata[1:0]);
              32'h08: slot_neighbours[ws] <= s_wdata[15:0];
              32'h0C: slot_adj_ptr[ws]    <= s_wdata;
              32'h10: slot_out_ptr[ws]    <= s_wdata;
              32'h14: if (s_wdata[0]) begin
                slot_state[ws] <= NS_PREFETCH;
                ft_start[ws]   <= 1'b1;
              end
              default: ;
            endcase
          end
        end else if (wa >= A_IRQ && wa < A_IRQ + 4*NW) begin
          for (int b = 0; b < 32; b++) begin
            int unsigned s;
            s = 32*((wa - A_IRQ)/4) + b;
            if (s < NODESLOTS && s_wdata[b]) irq_q[s] <= 1'b0;
          end
        end else begin
          unique case (wa)
            32'h000: in_features  <= s_wdata[15:0];
            32'h004: out_features <= s_wdata[15:0];
            32'h008: agg_func     <= agg_func_e'(s_wdata[1:0]);
            32'h00C: feature_base <= s_wdata;
            32'h010: weight_base  <= s_wdata;
            32'h014: weight_load  <= s_wdata[0];
            32'h0F0: feature_stride <= s_wdata;
            default: ;
          endcase
        end
      end
    end
  end

  logic unused_strb;
  assign unused_strb = ^s_wstrb;

  assert property (@(posedge clk) disable iff (!rst_n) s_bvalid && !s_bready |=> s_bvalid);
  assert property (@(posedge clk) disable iff (!rst_n) s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));
endmodule
