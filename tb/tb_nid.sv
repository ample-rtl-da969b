// tb_nid: self-checking test of the Node Instruction Decoder with 40
// nodeslots (two AVAILABLE/IRQ words).
//
// Directed part: every layer register and nodeslot field is written over
// AXI-Lite and read back; CTRL bit 0 must pulse weight_load; writes to a
// busy slot must be ignored. Random part: the host launches random free
// slots while the Prefetcher, AGE and FTE sides are driven at random
// (ft_agg_ready, age_req_ready, age_done, fte_pick, fte_done). A reference
// model of every nodeslot's state machine, written here from the handshake
// rules, is compared each cycle with slot_state, available, fte_pending
// and irq; AGE requests must name a slot that is asking, and the IRQ
// register must clear when written with ones. Every slot must be granted
// by the round-robin arbiter.
`include "tb_macros.svh"
module tb_nid;
  import ample_pkg::*;
  localparam int NS = 40, NW = 2;
  logic clk = 0, rst_n = 0;
  logic [11:0] s_awaddr, s_araddr;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready, irq;
  logic [31:0] s_wdata, s_rdata; logic [3:0] s_wstrb; logic [1:0] s_bresp, s_rresp;
  logic [15:0] in_features, out_features; agg_func_e agg_func;
  logic [31:0] feature_base, feature_stride, weight_base; logic weight_load, weight_busy;
  precision_e slot_prec [NS]; logic [15:0] slot_neighbours [NS];
  logic [31:0] slot_adj_ptr [NS], slot_out_ptr [NS]; ns_state_e slot_state [NS];
  logic [NS-1:0] available, ft_start, ft_agg_ready, age_done, fte_pending, fte_pick, fte_done;
  logic age_req_valid, age_req_ready; logic [5:0] age_req_slot;
  int checks = 0, failures = 0;

  nid #(.NODESLOTS(NS)) dut (.*);
  always #5 clk = ~clk;
  initial begin #3000000; failures++; $display("watchdog"); `FINISH end

  task automatic axil_write(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk); s_awaddr = a; s_awvalid = 1; s_wdata = d; s_wvalid = 1; s_wstrb = 4'hF;
    @(posedge clk); while (!(s_awready && s_wready)) @(posedge clk);
    #1 s_awvalid = 0; s_wvalid = 0;
    while (!s_bvalid) @(posedge clk);
    @(posedge clk); #1;
  endtask
  task automatic axil_read(input logic [11:0] a, output logic [31:0] d);
    @(negedge clk); s_araddr = a; s_arvalid = 1;
    @(posedge clk); while (!s_arready) @(posedge clk);
    #1 s_arvalid = 0;
    while (!s_rvalid) @(posedge clk);
    d = s_rdata;
    @(posedge clk); #1;
  endtask

  // ---------------------------------------------------- reference model
  ns_state_e m_state [NS];
  logic [NS-1:0] m_picked, m_irq;
  int grants [NS];
  logic random_on = 0;
  int wl_pulses = 0;
  always @(posedge clk) if (rst_n) begin
    if (weight_load) wl_pulses++;
    if (age_req_valid) begin
      `CHECK(m_state[age_req_slot] == NS_PREFETCH && ft_agg_ready[age_req_slot], "AGE request from a ready prefetching slot")
      if (age_req_ready) grants[age_req_slot]++;
    end
    for (int s = 0; s < NS; s++) begin
      `CHECK(slot_state[s] == m_state[s], "slot state")
      `CHECK(available[s] == (m_state[s] == NS_EMPTY), "available bit")
      `CHECK(fte_pending[s] == (m_state[s] == NS_TRANSFORMATION && !m_picked[s]), "fte_pending")
    end
    `CHECK(irq == |m_irq, "irq line")
    // next state
    for (int s = 0; s < NS; s++) case (m_state[s])
      NS_PREFETCH: if (age_req_valid && age_req_ready && age_req_slot == s) m_state[s] = NS_AGGREGATION;
      NS_AGGREGATION: if (age_done[s]) begin m_state[s] = NS_TRANSFORMATION; m_picked[s] = 0; end
      NS_TRANSFORMATION: begin
        if (fte_pick[s]) m_picked[s] = 1;
        if (fte_done[s]) begin m_state[s] = NS_EMPTY; m_irq[s] = 1; end
      end
      default: ;
    endcase
    if (s_awvalid && s_wvalid && s_awready) begin
      if (s_awaddr >= 12'h100 && s_awaddr[4:0] == 5'h14 && s_wdata[0]) begin
        int s; s = (s_awaddr - 12'h100) / 32;
        if (s < NS && m_state[s] == NS_EMPTY) begin
          m_state[s] = NS_PREFETCH;
        end
      end
      if (s_awaddr >= 12'h20 && s_awaddr < 12'h28)
        for (int b = 0; b < 32; b++) if (s_wdata[b] && (s_awaddr - 12'h20) / 4 * 32 + b < NS)
          m_irq[(s_awaddr - 12'h20) / 4 * 32 + b] = 0;
    end
  end
  // random accelerator side
  always @(negedge clk) begin
    for (int s = 0; s < NS; s++) begin
      ft_agg_ready[s] = random_on && ($urandom_range(0, 3) == 0);
      age_done[s] = random_on && m_state[s] == NS_AGGREGATION && ($urandom_range(0, 7) == 0);
      fte_pick[s] = random_on && m_state[s] == NS_TRANSFORMATION && !m_picked[s] && ($urandom_range(0, 3) == 0);
      fte_done[s] = random_on && m_state[s] == NS_TRANSFORMATION && m_picked[s] && ($urandom_range(0, 5) == 0);
    end
    age_req_ready = random_on && ($urandom_range(0, 1) == 0);
  end

  initial begin
    logic [31:0] d;
    s_awvalid = 0; s_wvalid = 0; s_arvalid = 0; s_bready = 1; s_rready = 1;
    s_awaddr = 0; s_araddr = 0; s_wdata = 0; s_wstrb = 0; weight_busy = 0;
    ft_agg_ready = 0; age_done = 0; fte_pick = 0; fte_done = 0; age_req_ready = 0;
    for (int s = 0; s < NS; s++) begin m_state[s] = NS_EMPTY; grants[s] = 0; end
    m_picked = 0; m_irq = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    // layer registers
    axil_write(12'h000, 32'd100); axil_write(12'h004, 32'd37); axil_write(12'h008, 32'd1);
    axil_write(12'h00C, 32'h1234_5678); axil_write(12'h010, 32'h0BAD_F00D); axil_write(12'h0F0, 32'h40_0000);
    `CHECK(in_features == 100 && out_features == 37 && agg_func == AGG_MEAN, "layer outputs")
    `CHECK(feature_base == 32'h1234_5678 && weight_base == 32'h0BAD_F00D && feature_stride == 32'h40_0000, "base outputs")
    axil_read(12'h000, d); `CHECK(d == 100, "IN_FEATURES readback")
    axil_read(12'h004, d); `CHECK(d == 37, "OUT_FEATURES readback")
    axil_read(12'h00C, d); `CHECK(d == 32'h1234_5678, "FEATURE_BASE readback")
    axil_read(12'h0F0, d); `CHECK(d == 32'h40_0000, "FEATURE_STRIDE readback")
    weight_busy = 1; axil_read(12'h014, d); `CHECK(d[0] == 1, "CTRL busy readback"); weight_busy = 0;
    axil_write(12'h014, 32'd1);
    `CHECK(wl_pulses == 1, "one weight_load pulse")
    // nodeslot fields
    for (int s = 0; s < NS; s += 7) begin
      logic [11:0] b; b = 12'(32'h100 + 32 * s);
      axil_write(b, 32'(1000 + s)); axil_write(b + 4, 32'(s % 3)); axil_write(b + 8, 32'(s + 5));
      axil_write(b + 12, 32'(s * 256)); axil_write(b + 16, 32'(s * 512));
      `CHECK(slot_prec[s] == precision_e'(s % 3) && slot_neighbours[s] == s + 5, "slot field outputs")
      `CHECK(slot_adj_ptr[s] == s * 256 && slot_out_ptr[s] == s * 512, "slot pointer outputs")
      axil_read(b, d); `CHECK(d == 1000 + s, "NODE_ID readback")
      axil_read(b + 8, d); `CHECK(d == s + 5, "NEIGHBOURS readback")
    end
    axil_read(12'h018, d); `CHECK(d == 32'hFFFF_FFFF, "all free, word 0")
    axil_read(12'h01C, d); `CHECK(d == 32'h0000_00FF, "all free, word 1")
    // launch slot 35: start pulse, busy, field write ignored
    fork
      begin axil_write(12'h100 + 35 * 32 + 12'h14, 32'd1); end
      begin @(posedge ft_start[35]); `CHECK(1, "ft_start pulse") end
    join
    axil_read(12'h01C, d); `CHECK(d == 32'h0000_00F7, "slot 35 not available")
    axil_write(12'h100 + 35 * 32 + 8, 32'd99);
    `CHECK(slot_neighbours[35] == 40, "write to busy slot ignored")
    axil_read(12'h100 + 35 * 32 + 12'h18, d); `CHECK(d == 32'(NS_PREFETCH), "STATE readback")
    // random phase
    random_on = 1;
    for (int it = 0; it < 600; it++) begin
      int s; s = $urandom_range(0, NS - 1);
      if (m_state[s] == NS_EMPTY) axil_write(12'(32'h100 + 32 * s + 32'h14), 32'd1);
      if (it % 50 == 49) begin
        axil_read(12'h020, d);
        axil_write(12'h020, d);
        axil_read(12'h024, d);
        axil_write(12'h024, d);
      end
    end
    random_on = 0;
    repeat (20) @(negedge clk);
    for (int s = 0; s < NS; s++) `CHECK(grants[s] > 0, "every slot granted by the AGE arbiter")
    $display("irq words %h", m_irq);
    `FINISH
  end
endmodule
