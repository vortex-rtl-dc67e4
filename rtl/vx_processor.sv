// vx_processor: the Vortex processor, top level.
//
// NUM_CORES SIMT cores (vx_core) grouped into NUM_CLUSTERS clusters. Inside a
// cluster the cores' line-wide memory ports are merged by a vx_mem_arb; the
// cluster ports are merged again by a second vx_mem_arb into the single
// memory port of the processor. Each arbiter level appends its input index
// below the tag, so responses find their way back. A global barrier table
// (vx_barrier with one waiter per wavefront of every core) serves barriers
// whose id has its MSB set; one core's request is accepted per cycle,
// round-robin, and the release mask is split back to the cores.
//
// Ports: one memory request/response port with line address, line data,
// byte enables and tag (responses may return in any order, matched by tag),
// and busy, high until every core has finished. Cores start at STARTUP_ADDR
// with wavefront 0, thread 0 active.
//
// The core count (32 at most), 4 wavefronts x 4 threads per core, 16 KB
// caches with 4 banks and 64-byte lines, and the global barrier selected by
// the id's MSB follow the design. The cluster grouping (8 clusters of 4
// cores), the arbitration policies and the absence of L2/L3 caches (optional
// in the design) are this implementation's choices.
module vx_processor #(
  parameter int unsigned NUM_CORES    = 32,
  parameter int unsigned NUM_CLUSTERS = 8,
  parameter int unsigned NUM_WARPS    = 4,
  parameter int unsigned NUM_THREADS  = 4,
  parameter logic [31:0] STARTUP_ADDR = 32'h8000_0000,
  parameter int unsigned LINE_SIZE    = 64,
  localparam int unsigned CPC  = NUM_CORES / NUM_CLUSTERS,            // cores per cluster
  localparam int unsigned LAW  = 32 - $clog2(LINE_SIZE),
  localparam int unsigned CTW  = LAW + 1,                             // core tag width
  localparam int unsigned CSB  = (CPC > 1) ? $clog2(CPC) : 1,
  localparam int unsigned KSB  = (NUM_CLUSTERS > 1) ? $clog2(NUM_CLUSTERS) : 1,
  localparam int unsigned KTW  = CTW + CSB,                           // cluster tag width
  localparam int unsigned MEM_TAG_WIDTH = KTW + KSB
) (
  input  logic                     clk,
  input  logic                     reset,
  output logic                     mem_req_valid,
  input  logic                     mem_req_ready,
  output logic                     mem_req_rw,
  output logic [LAW-1:0]           mem_req_addr,
  output logic [LINE_SIZE*8-1:0]   mem_req_data,
  output logic [LINE_SIZE-1:0]     mem_req_byteen,
  output logic [MEM_TAG_WIDTH-1:0] mem_req_tag,
  input  logic                     mem_rsp_valid,
  output logic                     mem_rsp_ready,
  input  logic [LINE_SIZE*8-1:0]   mem_rsp_data,
  input  logic [MEM_TAG_WIDTH-1:0] mem_rsp_tag,
  output logic                     busy
);
  localparam int unsigned WB   = (NUM_WARPS > 1) ? $clog2(NUM_WARPS) : 1;
  localparam int unsigned NB   = 4;                                   // barriers per table
  localparam int unsigned BIDW = $clog2(NB);
  localparam int unsigned GW   = NUM_CORES * NUM_WARPS;               // global waiters
  localparam int unsigned GCW  = $clog2(GW + 1);
  localparam int unsigned CB   = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1;
  localparam int unsigned DW   = LINE_SIZE * 8;

  // ---------------- per-core signals ----------------
  logic [NUM_CORES-1:0] c_req_valid, c_req_ready, c_req_rw, c_rsp_valid, c_rsp_ready, c_busy;
  logic [LAW-1:0]       c_req_addr [NUM_CORES];
  logic [DW-1:0]        c_req_data [NUM_CORES];
  logic [LINE_SIZE-1:0] c_req_be   [NUM_CORES];
  logic [CTW-1:0]       c_req_tag  [NUM_CORES];
  logic [DW-1:0]        k_rsp_data [NUM_CLUSTERS];
  logic [CTW-1:0]       k_rsp_tag  [NUM_CLUSTERS];

  logic [NUM_CORES-1:0] g_valid, g_ready;
  logic [BIDW-1:0]      g_id    [NUM_CORES];
  logic [GCW-1:0]       g_count [NUM_CORES];
  logic [WB-1:0]        g_wid   [NUM_CORES];
  logic                 gb_rel_valid;
  logic [GW-1:0]        gb_rel_mask;

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    vx_core #(
      .NUM_WARPS (NUM_WARPS), .NUM_THREADS (NUM_THREADS), .NUM_CORES (NUM_CORES),
      .CORE_ID (c), .STARTUP_ADDR (STARTUP_ADDR), .LINE_SIZE (LINE_SIZE),
      .NUM_BARRIERS (NB), .GBAR_WAITERS (GW)
    ) u_core (
      .clk, .reset,
      .mem_req_valid (c_req_valid[c]), .mem_req_ready (c_req_ready[c]), .mem_req_rw (c_req_rw[c]),
      .mem_req_addr (c_req_addr[c]), .mem_req_data (c_req_data[c]), .mem_req_byteen (c_req_be[c]),
      .mem_req_tag (c_req_tag[c]),
      .mem_rsp_valid (c_rsp_valid[c]), .mem_rsp_ready (c_rsp_ready[c]),
      .mem_rsp_data (k_rsp_data[c / CPC]), .mem_rsp_tag (k_rsp_tag[c / CPC]),
      .gbar_req_valid (g_valid[c]), .gbar_req_ready (g_ready[c]), .gbar_req_id (g_id[c]),
      .gbar_req_count (g_count[c]), .gbar_req_wid (g_wid[c]),
      .gbar_rel_valid (gb_rel_valid), .gbar_rel_mask (gb_rel_mask[c*NUM_WARPS +: NUM_WARPS]),
      .busy (c_busy[c])
    );
  end

  // ---------------- cluster arbiters ----------------
  logic [NUM_CLUSTERS-1:0] k_req_valid, k_req_ready, k_req_rw, k_rsp_valid, k_rsp_ready;
  logic [LAW-1:0]       k_req_addr [NUM_CLUSTERS];
  logic [DW-1:0]        k_req_data [NUM_CLUSTERS];
  logic [LINE_SIZE-1:0] k_req_be   [NUM_CLUSTERS];
  logic [KTW-1:0]       k_req_tag  [NUM_CLUSTERS];
  logic [DW-1:0]        p_rsp_data;
  logic [KTW-1:0]       p_rsp_tag;

  for (genvar k = 0; k < NUM_CLUSTERS; k++) begin : g_cluster
    logic [LAW-1:0]       a [CPC];
    logic [DW-1:0]        d [CPC];
    logic [LINE_SIZE-1:0] b [CPC];
    logic [CTW-1:0]       t [CPC];
    for (genvar i = 0; i < CPC; i++) begin : g_in
      assign a[i] = c_req_addr[k*CPC + i];
      assign d[i] = c_req_data[k*CPC + i];
      assign b[i] = c_req_be[k*CPC + i];
      assign t[i] = c_req_tag[k*CPC + i];
    end
    vx_mem_arb #(.NUM_INPUTS (CPC), .ADDR_WIDTH (LAW), .DATA_WIDTH (DW), .TAG_WIDTH (CTW)) u_arb (
      .clk, .reset,
      .in_req_valid (c_req_valid[k*CPC +: CPC]), .in_req_ready (c_req_ready[k*CPC +: CPC]),
      .in_req_rw (c_req_rw[k*CPC +: CPC]), .in_req_addr (a), .in_req_data (d),
      .in_req_byteen (b), .in_req_tag (t),
      .in_rsp_valid (c_rsp_valid[k*CPC +: CPC]), .in_rsp_ready (c_rsp_ready[k*CPC +: CPC]),
      .in_rsp_data (k_rsp_data[k]), .in_rsp_tag (k_rsp_tag[k]),
      .out_req_valid (k_req_valid[k]), .out_req_ready (k_req_ready[k]), .out_req_rw (k_req_rw[k]),
      .out_req_addr (k_req_addr[k]), .out_req_data (k_req_data[k]), .out_req_byteen (k_req_be[k]),
      .out_req_tag (k_req_tag[k]),
      .out_rsp_valid (k_rsp_valid[k]), .out_rsp_ready (k_rsp_ready[k]),
      .out_rsp_data (p_rsp_data), .out_rsp_tag (p_rsp_tag)
    );
  end

  // ---------------- processor memory arbiter ----------------
  vx_mem_arb #(.NUM_INPUTS (NUM_CLUSTERS), .ADDR_WIDTH (LAW), .DATA_WIDTH (DW), .TAG_WIDTH (KTW)) u_arb (
    .clk, .reset,
    .in_req_valid (k_req_valid), .in_req_ready (k_req_ready), .in_req_rw (k_req_rw),
    .in_req_addr (k_req_addr), .in_req_data (k_req_data), .in_req_byteen (k_req_be),
    .in_req_tag (k_req_tag),
    .in_rsp_valid (k_rsp_valid), .in_rsp_ready (k_rsp_ready),
    .in_rsp_data (p_rsp_data), .in_rsp_tag (p_rsp_tag),
    .out_req_valid (mem_req_valid), .out_req_ready (mem_req_ready), .out_req_rw (mem_req_rw),
    .out_req_addr (mem_req_addr), .out_req_data (mem_req_data), .out_req_byteen (mem_req_byteen),
    .out_req_tag (mem_req_tag),
    .out_rsp_valid (mem_rsp_valid), .out_rsp_ready (mem_rsp_ready),
    .out_rsp_data (mem_rsp_data), .out_rsp_tag (mem_rsp_tag)
  );

  // ---------------- global barrier ----------------
  logic [CB-1:0] gb_rr_q, gb_sel;
  logic          gb_any;
  always_comb begin
    gb_any = 1'b0;
    gb_sel = gb_rr_q;
    for (int k = NUM_CORES - 1; k >= 0; k--) begin
      int unsigned c;
      c = (int'(gb_rr_q) + k + 1) % NUM_CORES;
      if (g_valid[c]) begin gb_any = 1'b1; gb_sel = CB'(c); end
    end
    g_ready = '0;
    g_ready[gb_sel] = gb_any;
  end
  always_ff @(posedge clk) begin
    if (reset)       gb_rr_q <= '0;
    else if (gb_any) gb_rr_q <= gb_sel;
  end

  vx_barrier #(.NUM_BARRIERS (NB), .NUM_WAITERS (GW)) u_gbar (
    .clk, .reset,
    .req_valid (gb_any), .req_id (g_id[gb_sel]), .req_count (g_count[gb_sel]),
    .req_waiter ({gb_sel, g_wid[gb_sel]}),
    .rel_valid (gb_rel_valid), .rel_mask (gb_rel_mask)
  );

  assign busy = |c_busy;

  initial assert (NUM_CORES % NUM_CLUSTERS == 0) else $error("NUM_CORES must be a multiple of NUM_CLUSTERS");
endmodule
