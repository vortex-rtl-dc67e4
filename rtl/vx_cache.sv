// vx_cache: multi-banked, non-blocking, high-bandwidth cache.
//
// Front end - bank selector: every cycle each bank takes the lowest-numbered
// lane that addresses it. With virtual ports (NUM_PORTS > 1) the bank also
// takes other read lanes that hit the same line, up to NUM_PORTS of them, so
// one data-store access serves several threads; lanes that lose a bank
// conflict are not accepted (their ready stays low) and retry. Writes take a
// single port. Banks are interleaved on the line address.
// Banks - see vx_cache_bank (4-stage pipeline with MSHR).
// Back end - the core response merger takes the lowest bank with a response
// and merges into the same core response every other bank head that carries
// the same request tag; the memory request arbiter serves the banks
// round-robin; fills are routed back to the bank by line address.
//
// Core side: per lane valid/ready, rw, byte address, byte enables, data, and
// one tag per request cycle; response: valid/ready, lane mask, words, tag.
// Memory side: line-wide requests and responses; the request tag is the line
// address itself. Stores produce no response.
module vx_cache #(
  parameter int unsigned CACHE_SIZE = 16384,
  parameter int unsigned LINE_SIZE  = 64,
  parameter int unsigned NUM_BANKS  = 4,
  parameter int unsigned NUM_PORTS  = 2,
  parameter int unsigned NUM_REQS   = 4,
  parameter int unsigned TAG_WIDTH  = 8,
  parameter int unsigned MSHR_SIZE  = 4,
  localparam int unsigned LAW = 32 - $clog2(LINE_SIZE),
  localparam int unsigned BB  = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 1
) (
  input  logic                   clk,
  input  logic                   reset,
  input  logic [NUM_REQS-1:0]    core_req_valid,
  output logic [NUM_REQS-1:0]    core_req_ready,
  input  logic                   core_req_rw,
  input  logic [31:0]            core_req_addr   [NUM_REQS],
  input  logic [3:0]             core_req_byteen [NUM_REQS],
  input  logic [31:0]            core_req_data   [NUM_REQS],
  input  logic [TAG_WIDTH-1:0]   core_req_tag,
  output logic                   core_rsp_valid,
  input  logic                   core_rsp_ready,
  output logic [NUM_REQS-1:0]    core_rsp_mask,
  output logic [31:0]            core_rsp_data [NUM_REQS],
  output logic [TAG_WIDTH-1:0]   core_rsp_tag,
  output logic                   mem_req_valid,
  input  logic                   mem_req_ready,
  output logic                   mem_req_rw,
  output logic [LAW-1:0]         mem_req_addr,
  output logic [LINE_SIZE*8-1:0] mem_req_data,
  output logic [LINE_SIZE-1:0]   mem_req_byteen,
  input  logic                   mem_rsp_valid,
  output logic                   mem_rsp_ready,
  input  logic [LAW-1:0]         mem_rsp_addr,
  input  logic [LINE_SIZE*8-1:0] mem_rsp_data,
  output logic                   idle
);
  localparam int unsigned WPL  = LINE_SIZE / 4;
  localparam int unsigned OFFB = (WPL > 1) ? $clog2(WPL) : 1;
  localparam int unsigned LB   = (NUM_REQS > 1) ? $clog2(NUM_REQS) : 1;
  localparam int unsigned NUM_SETS = CACHE_SIZE / LINE_SIZE / NUM_BANKS;
  localparam int unsigned BANK_SHIFT = (NUM_BANKS > 1) ? BB : 0;

  function automatic logic [BB-1:0] bank_of(logic [31:0] addr);
    return (NUM_BANKS > 1) ? BB'(addr >> $clog2(LINE_SIZE)) : '0;
  endfunction

  // ---------------- bank selector (virtual ports) ----------------
  logic [NUM_BANKS-1:0]  bk_valid, bk_ready;
  logic [NUM_PORTS-1:0]  bk_pmask [NUM_BANKS];
  logic [LB-1:0]         bk_lane  [NUM_BANKS][NUM_PORTS];
  logic [OFFB-1:0]       bk_off   [NUM_BANKS][NUM_PORTS];
  logic [LAW-1:0]        bk_line  [NUM_BANKS];
  logic [3:0]            bk_byteen[NUM_BANKS];
  logic [31:0]           bk_data  [NUM_BANKS];
  logic [NUM_REQS-1:0]   taken    [NUM_BANKS];

  always_comb begin
    for (int b = 0; b < NUM_BANKS; b++) begin
      logic found;
      int unsigned np;
      found = 1'b0; np = 0;
      bk_valid[b] = 1'b0; bk_pmask[b] = '0; bk_line[b] = '0; bk_byteen[b] = '0; bk_data[b] = '0;
      taken[b] = '0;
      for (int p = 0; p < NUM_PORTS; p++) begin bk_lane[b][p] = '0; bk_off[b][p] = '0; end
      for (int i = 0; i < NUM_REQS; i++) begin
        if (core_req_valid[i] && bank_of(core_req_addr[i]) == BB'(b)) begin
          if (!found) begin
            found = 1'b1;
            bk_valid[b]  = 1'b1;
            bk_line[b]   = core_req_addr[i][31 -: LAW];
            bk_byteen[b] = core_req_byteen[i];
            bk_data[b]   = core_req_data[i];
            bk_pmask[b][0] = 1'b1;
            bk_lane[b][0]  = LB'(i);
            bk_off[b][0]   = OFFB'(core_req_addr[i] >> 2);
            taken[b][i]    = 1'b1;
            np = 1;
          end else if (!core_req_rw && np < NUM_PORTS && core_req_addr[i][31 -: LAW] == bk_line[b]) begin
            bk_pmask[b][np] = 1'b1;
            bk_lane[b][np]  = LB'(i);
            bk_off[b][np]   = OFFB'(core_req_addr[i] >> 2);
            taken[b][i]     = 1'b1;
            np = np + 1;
          end
        end
      end
    end
  end

  always_comb begin
    core_req_ready = '0;
    for (int b = 0; b < NUM_BANKS; b++)
      if (bk_ready[b]) core_req_ready |= taken[b];
  end

  // ---------------- banks ----------------
  logic [NUM_BANKS-1:0]  brsp_valid, brsp_ready;
  logic [NUM_PORTS-1:0]  brsp_pmask [NUM_BANKS];
  logic [LB-1:0]         brsp_lane  [NUM_BANKS][NUM_PORTS];
  logic [31:0]           brsp_data  [NUM_BANKS][NUM_PORTS];
  logic [TAG_WIDTH-1:0]  brsp_tag   [NUM_BANKS];
  logic [NUM_BANKS-1:0]  bmreq_valid, bmreq_ready, bmreq_rw, bmrsp_valid, bmrsp_ready, bidle;
  logic [LAW-1:0]        bmreq_line [NUM_BANKS];
  logic [LINE_SIZE*8-1:0] bmreq_data [NUM_BANKS];
  logic [LINE_SIZE-1:0]  bmreq_be   [NUM_BANKS];

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    vx_cache_bank #(
      .LINE_SIZE(LINE_SIZE), .NUM_SETS(NUM_SETS), .NUM_PORTS(NUM_PORTS), .NUM_REQS(NUM_REQS),
      .TAG_WIDTH(TAG_WIDTH), .MSHR_SIZE(MSHR_SIZE), .BANK_SHIFT(BANK_SHIFT)
    ) u_bank (
      .clk, .reset,
      .core_req_valid (bk_valid[b]),
      .core_req_ready (bk_ready[b]),
      .core_req_rw    (core_req_rw),
      .core_req_line  (bk_line[b]),
      .core_req_pmask (bk_pmask[b]),
      .core_req_lane  (bk_lane[b]),
      .core_req_off   (bk_off[b]),
      .core_req_byteen(bk_byteen[b]),
      .core_req_data  (bk_data[b]),
      .core_req_tag   (core_req_tag),
      .core_rsp_valid (brsp_valid[b]),
      .core_rsp_ready (brsp_ready[b]),
      .core_rsp_pmask (brsp_pmask[b]),
      .core_rsp_lane  (brsp_lane[b]),
      .core_rsp_data  (brsp_data[b]),
      .core_rsp_tag   (brsp_tag[b]),
      .mem_req_valid  (bmreq_valid[b]),
      .mem_req_ready  (bmreq_ready[b]),
      .mem_req_rw     (bmreq_rw[b]),
      .mem_req_line   (bmreq_line[b]),
      .mem_req_data   (bmreq_data[b]),
      .mem_req_byteen (bmreq_be[b]),
      .mem_rsp_valid  (bmrsp_valid[b]),
      .mem_rsp_ready  (bmrsp_ready[b]),
      .mem_rsp_line   (mem_rsp_addr),
      .mem_rsp_data   (mem_rsp_data),
      .idle           (bidle[b])
    );
    assign bmrsp_valid[b] = mem_rsp_valid && (NUM_BANKS == 1 || BB'(mem_rsp_addr) == BB'(b));
  end

  // fill routing
  always_comb begin
    mem_rsp_ready = 1'b0;
    for (int b = 0; b < NUM_BANKS; b++) if (bmrsp_valid[b]) mem_rsp_ready = bmrsp_ready[b];
  end

  // ---------------- core response merger ----------------
  always_comb begin
    logic found;
    logic [TAG_WIDTH-1:0] t;
    found = 1'b0; t = '0;
    core_rsp_valid = 1'b0;
    core_rsp_mask  = '0;
    for (int i = 0; i < NUM_REQS; i++) core_rsp_data[i] = '0;
    brsp_ready = '0;
    for (int b = 0; b < NUM_BANKS; b++) begin
      if (brsp_valid[b] && (!found || brsp_tag[b] == t)) begin
        if (!found) begin found = 1'b1; t = brsp_tag[b]; end
        brsp_ready[b] = core_rsp_ready;
        for (int p = 0; p < NUM_PORTS; p++)
          if (brsp_pmask[b][p]) begin
            core_rsp_mask[brsp_lane[b][p]] = 1'b1;
            core_rsp_data[brsp_lane[b][p]] = brsp_data[b][p];
          end
      end
    end
    core_rsp_valid = found;
    core_rsp_tag   = t;
  end

  // ---------------- memory request arbiter (round-robin) ----------------
  logic [BB-1:0] rr_q, grant;
  logic          gvalid;
  always_comb begin
    gvalid = 1'b0; grant = '0;
    for (int k = NUM_BANKS - 1; k >= 0; k--) begin
      int unsigned b;
      b = (int'(rr_q) + k + 1) % NUM_BANKS;
      if (bmreq_valid[b]) begin gvalid = 1'b1; grant = BB'(b); end
    end
  end
  always_comb begin
    bmreq_ready = '0;
    bmreq_ready[grant] = gvalid && mem_req_ready;
  end
  always_ff @(posedge clk) begin
    if (reset) rr_q <= '0;
    else if (gvalid && mem_req_ready) rr_q <= grant;
  end
  assign mem_req_valid  = gvalid;
  assign mem_req_rw     = bmreq_rw[grant];
  assign mem_req_addr   = bmreq_line[grant];
  assign mem_req_data   = bmreq_data[grant];
  assign mem_req_byteen = bmreq_be[grant];

  assign idle = (bidle == '1);
endmodule
