// Body shared by the end-to-end testbenches of ample_top. The including
// module defines the localparams NS, HB, AF, MF, MO, NNODES, MAXDEG and
// instantiates `dut` with those sizes.
//
// A host task follows the paper's programming flow: write the layer
// registers, load the weights, then keep filling whichever nodeslots the
// AVAILABLE mask shows as free with the next node, collecting finished
// nodes from the IRQ register, until every node of the graph is done. Two
// layers run: a sum layer (GCN/GIN style) and a mean layer (GraphSAGE
// style). Each node gets a precision from its degree the way the
// degree-based quantisation does: the highest degrees float, most int8, a
// few int4. Embeddings, adjacency lists and weights are generated here and
// placed in the memory models; every updated embedding written by the
// accelerator is compared with a reference computed here. The test also
// counts the mechanisms the design relies on and fails if one never
// happened: partial responses, allocation stalls, FTE batches of several
// nodes, nodeslot reuse, and nodes of every precision and both functions.
  logic clk = 0, rst_n = 0;
  logic [11:0] s_awaddr, s_araddr;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready, irq;
  logic [31:0] s_wdata, s_rdata; logic [3:0] s_wstrb; logic [1:0] s_bresp, s_rresp;
  logic [31:0] hbm_araddr [HB]; logic [7:0] hbm_arlen [HB]; logic [2:0] hbm_arsize [HB];
  logic [1:0] hbm_arburst [HB]; logic [HB-1:0] hbm_arvalid, hbm_arready, hbm_rlast, hbm_rvalid, hbm_rready;
  logic [31:0] hbm_rdata [HB]; logic [1:0] hbm_rresp [HB];
  logic [31:0] wt_araddr; logic [7:0] wt_arlen; logic [2:0] wt_arsize; logic [1:0] wt_arburst;
  logic wt_arvalid, wt_arready, wt_rlast, wt_rvalid, wt_rready; logic [31:0] wt_rdata; logic [1:0] wt_rresp;
  logic out_wr_valid, out_wr_ready; logic [31:0] out_wr_addr, out_wr_data;

  int checks = 0, failures = 0;

  axi_mem_model #(.NPORTS(HB), .LATENCY(6)) u_hbm (
    .clk, .rst_n, .araddr(hbm_araddr), .arlen(hbm_arlen), .arvalid(hbm_arvalid),
    .arready(hbm_arready), .rdata(hbm_rdata), .rresp(hbm_rresp), .rlast(hbm_rlast),
    .rvalid(hbm_rvalid), .rready(hbm_rready));
  logic [31:0] wa1 [1]; logic [7:0] wl1 [1]; logic [31:0] wd1 [1]; logic [1:0] wr1 [1];
  assign wa1[0] = wt_araddr; assign wl1[0] = wt_arlen; assign wt_rdata = wd1[0]; assign wt_rresp = wr1[0];
  axi_mem_model #(.NPORTS(1), .LATENCY(6)) u_wmem (
    .clk, .rst_n, .araddr(wa1), .arlen(wl1), .arvalid(wt_arvalid), .arready(wt_arready),
    .rdata(wd1), .rresp(wr1), .rlast(wt_rlast), .rvalid(wt_rvalid), .rready(wt_rready));

  always #5 clk = ~clk;

  // ------------------------------------------------------------ graph
  localparam logic [31:0] ADJ   = 32'h0010_0000;
  localparam logic [31:0] FEAT  = 32'h0100_0000;
  localparam logic [31:0] FSTR  = 32'h0040_0000;
  localparam logic [31:0] WTS   = 32'h0200_0000;
  localparam logic [31:0] OUTB  = 32'h0300_0000;
  int deg [NNODES];
  int nbr [NNODES][MAXDEG];
  int prec_of [NNODES];
  int IN, OUT;

  function automatic int xval(input int v, input int k); return ((v * 7 + k * 3) % 13) - 6; endfunction
  function automatic int wval(input int p, input int o, input int i);
    return ((o * 5 + i * 3 + p) % 9) - 4;
  endfunction

  // ---------------------------------------------------- output capture
  logic [31:0] outmem [int unsigned];
  always @(negedge clk) out_wr_ready <= ($urandom_range(0, 7) != 0);
  always @(posedge clk) if (rst_n && out_wr_valid && out_wr_ready) outmem[out_wr_addr] = out_wr_data;

  // ------------------------------------------------- mechanism counters
  int n_partial = 0, n_stall = 0, n_multi_batch = 0, n_reuse = 0, launches [NS];
  always @(posedge clk) if (rst_n) begin
    n_partial += $countones(dut.ft_partial);
    if (dut.alloc_stall) n_stall++;
    for (int p = 0; p < 3; p++) if ($countones(dut.p_pick[p]) > 1) n_multi_batch++;
  end

  // ---------------------------------------------------------- AXI-Lite
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

  localparam int NW = (NS + 31) / 32;
  task automatic run_layer(input int in_f, input int out_f, input int fn);
    int next, finished, slot_node [NS];
    logic [31:0] d;
    int nprec [3];
    IN = in_f; OUT = out_f;
    // weights, per precision
    for (int p = 0; p < 3; p++) for (int o = 0; o < OUT; o++) for (int i = 0; i < IN; i++) begin
      int v; v = wval(p, o, i);
      u_wmem.mem[(WTS + 32'(((p * OUT + o) * IN + i) * 4)) / 4] = (p == 0) ? r2f(real'(v)) : 32'(v);
    end
    // embeddings, one table per precision
    for (int p = 0; p < 3; p++) for (int v = 0; v < NNODES; v++) for (int k = 0; k < IN; k++)
      u_hbm.mem[(FEAT + 32'(p) * FSTR + 32'((v * IN + k) * 4)) / 4] =
        (p == 0) ? r2f(real'(xval(v, k))) : 32'(xval(v, k));
    axil_write(12'h000, 32'(IN)); axil_write(12'h004, 32'(OUT)); axil_write(12'h008, 32'(fn));
    axil_write(12'h00C, FEAT); axil_write(12'h0F0, FSTR); axil_write(12'h010, WTS);
    axil_write(12'h014, 32'd1);
    do axil_read(12'h014, d); while (d[0]);
    for (int s = 0; s < NS; s++) slot_node[s] = -1;
    next = 0; finished = 0; nprec = '{0, 0, 0};
    while (finished < NNODES) begin
      logic [31:0] av [NW], iq [NW];
      for (int w = 0; w < NW; w++) axil_read(12'(32'h18 + 4 * w), av[w]);
      for (int w = 0; w < NW; w++) axil_read(12'(32'h18 + 4 * NW + 4 * w), iq[w]);
      for (int s = 0; s < NS; s++) if (iq[s / 32][s % 32]) begin
        `CHECK(slot_node[s] >= 0, "interrupt from a programmed slot")
        slot_node[s] = -1; finished++;
      end
      for (int w = 0; w < NW; w++) if (iq[w] != 0) axil_write(12'(32'h18 + 4 * NW + 4 * w), iq[w]);
      for (int s = 0; s < NS && next < NNODES; s++) if (av[s / 32][s % 32] && slot_node[s] < 0 && !iq[s / 32][s % 32]) begin
        logic [11:0] b; b = 12'(32'h100 + 32'h20 * s);
        axil_write(b + 12'h00, 32'(next));
        axil_write(b + 12'h04, 32'(prec_of[next]));
        axil_write(b + 12'h08, 32'(deg[next]));
        axil_write(b + 12'h0C, ADJ + 32'(next * MAXDEG * 4));
        axil_write(b + 12'h10, OUTB + 32'(next * 256));
        axil_write(b + 12'h14, 32'd1);
        if (launches[s] > 0) n_reuse++;
        launches[s]++;
        nprec[prec_of[next]]++;
        slot_node[s] = next; next++;
      end
    end
    `CHECK(!irq, "interrupt line low when all collected")
    for (int p = 0; p < 3; p++) `CHECK(nprec[p] > 0, "nodes of every precision ran")
    // compare every output
    for (int v = 0; v < NNODES; v++) begin
      int agg [64];
      real aggr [64];
      for (int k = 0; k < IN; k++) begin
        agg[k] = 0;
        for (int n = 0; n < deg[v]; n++) agg[k] += xval(nbr[v][n], k);
        aggr[k] = real'(agg[k]);
        if (fn == 1) begin aggr[k] = aggr[k] / deg[v]; agg[k] = agg[k] / deg[v]; end
      end
      for (int o = 0; o < OUT; o++) begin
        logic [31:0] a, got; int e; real er;
        a = OUTB + 32'(v * 256 + o * 4);
        e = 0; er = 0.0;
        for (int i = 0; i < IN; i++) begin
          e += agg[i] * wval(prec_of[v], o, i);
          er += aggr[i] * real'(wval(prec_of[v], o, i));
        end
        got = outmem.exists(a) ? outmem[a] : 32'hDEAD_BEEF;
        if (prec_of[v] != 0) `CHECK($signed(got) == e, "integer output word")
        else begin
          real g, tol; g = f2r(got); tol = (er < 0 ? -er : er) * 1e-5 + 1e-5;
          `CHECK((g - er) <= tol && (er - g) <= tol, "float output word")
        end
      end
    end
    outmem.delete();
  endtask

  initial begin
    s_awvalid = 0; s_wvalid = 0; s_arvalid = 0; s_bready = 1; s_rready = 1;
    s_awaddr = 0; s_araddr = 0; s_wdata = 0; s_wstrb = 0;
    for (int s = 0; s < NS; s++) launches[s] = 0;
    // graph: random degrees, a few nodes above the message queue capacity
    for (int v = 0; v < NNODES; v++) begin
      deg[v] = (v % 7 == 3) ? MAXDEG : $urandom_range(1, MAXDEG / 2);
      prec_of[v] = (deg[v] >= MAXDEG - 1) ? 0 : ((v % 5 == 1) ? 2 : 1);
      for (int n = 0; n < deg[v]; n++) begin
        nbr[v][n] = $urandom_range(0, NNODES - 1);
        u_hbm.mem[(ADJ + 32'((v * MAXDEG + n) * 4)) / 4] = 32'(nbr[v][n]);
      end
    end
    repeat (5) @(negedge clk); rst_n = 1;
    run_layer(MF, MO, 0);
    run_layer(MF / 2 + 1, MO / 2 + 1, 1);
    `CHECK(n_partial > 0, "partial response happened")
    `CHECK(n_stall > 0, "allocation stall happened")
    `CHECK(n_multi_batch > 0, "FTE batch of several nodes happened")
    `CHECK(n_reuse > 0, "nodeslot reused")
    $display("mechanisms: partial=%0d stall=%0d multi_batch=%0d reuse=%0d",
             n_partial, n_stall, n_multi_batch, n_reuse);
    `FINISH
  end
