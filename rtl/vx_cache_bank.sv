// vx_cache_bank: one bank of the high-bandwidth non-blocking cache.
//
// Direct-mapped, write-through, no write-allocate. A request is either a
// read of up to NUM_PORTS words of one line (the virtual ports filled by the
// bank selector) or a write of one word. The bank pipeline has four stages:
//   S0 schedule - picks, in priority order, a replay from the MSHR, a memory
//                 fill, or the incoming core request
//   S1 tag      - tag lookup/update; a read miss is parked in the MSHR and,
//                 if no miss to the same line is outstanding, sends a line
//                 read to memory; a write is always forwarded to memory
//   S2 data     - data-store read, fill write or write-hit merge
//   S3 response - read data is pushed into the core response queue
// The MSHR marks its entries for a line ready when that line's fill passes
// S2, and they are replayed through the pipeline. Deadlock is avoided as the
// design prescribes: a core request enters only if the MSHR, the memory
// request queue and the response queue can take everything already in the
// pipeline plus it ("early full"). The stages, the MSHR and the priority
// order follow the design; associativity, write policy and queue depths are
// this implementation's choices.
//
// Interface: core_req valid/ready; core_rsp valid/ready with port mask, lane
// ids, words and tag; mem_req valid/ready (rw, line address, data, byte
// enables); mem_rsp valid/ready with the line and its address.
module vx_cache_bank #(
  parameter int unsigned LINE_SIZE = 64,          // bytes
  parameter int unsigned NUM_SETS  = 64,
  parameter int unsigned NUM_PORTS = 2,
  parameter int unsigned NUM_REQS  = 4,
  parameter int unsigned TAG_WIDTH = 8,
  parameter int unsigned MSHR_SIZE = 4,
  parameter int unsigned RSPQ_SIZE = 4,
  parameter int unsigned MEMQ_SIZE = 8,
  localparam int unsigned WPL  = LINE_SIZE / 4,
  localparam int unsigned OFFB = (WPL > 1) ? $clog2(WPL) : 1,
  localparam int unsigned LAW  = 32 - $clog2(LINE_SIZE),   // line address width
  localparam int unsigned LB   = (NUM_REQS > 1) ? $clog2(NUM_REQS) : 1,
  parameter int unsigned BANK_SHIFT = 0,          // line-address bits used for bank select
  localparam int unsigned SB   = (NUM_SETS > 1) ? $clog2(NUM_SETS) : 1
) (
  input  logic                      clk,
  input  logic                      reset,
  // core request
  input  logic                      core_req_valid,
  output logic                      core_req_ready,
  input  logic                      core_req_rw,
  input  logic [LAW-1:0]            core_req_line,
  input  logic [NUM_PORTS-1:0]      core_req_pmask,
  input  logic [LB-1:0]             core_req_lane [NUM_PORTS],
  input  logic [OFFB-1:0]           core_req_off  [NUM_PORTS],
  input  logic [3:0]                core_req_byteen,
  input  logic [31:0]               core_req_data,
  input  logic [TAG_WIDTH-1:0]      core_req_tag,
  // core response
  output logic                      core_rsp_valid,
  input  logic                      core_rsp_ready,
  output logic [NUM_PORTS-1:0]      core_rsp_pmask,
  output logic [LB-1:0]             core_rsp_lane [NUM_PORTS],
  output logic [31:0]               core_rsp_data [NUM_PORTS],
  output logic [TAG_WIDTH-1:0]      core_rsp_tag,
  // memory request
  output logic                      mem_req_valid,
  input  logic                      mem_req_ready,
  output logic                      mem_req_rw,
  output logic [LAW-1:0]            mem_req_line,
  output logic [LINE_SIZE*8-1:0]    mem_req_data,
  output logic [LINE_SIZE-1:0]      mem_req_byteen,
  // memory response (fill)
  input  logic                      mem_rsp_valid,
  output logic                      mem_rsp_ready,
  input  logic [LAW-1:0]            mem_rsp_line,
  input  logic [LINE_SIZE*8-1:0]    mem_rsp_data,
  // status
  output logic                      idle
);
  localparam int unsigned MB = (MSHR_SIZE > 1) ? $clog2(MSHR_SIZE) : 1;

  // pipeline request record
  typedef struct packed {
    logic                          valid;
    logic                          fill;
    logic                          rw;
    logic [LAW-1:0]                line;
    logic [NUM_PORTS-1:0]          pmask;
    logic [NUM_PORTS*LB-1:0]       lanes;
    logic [NUM_PORTS*OFFB-1:0]     offs;
    logic [3:0]                    byteen;
    logic [31:0]                   wdata;
    logic [TAG_WIDTH-1:0]          tag;
  } preq_t;

  preq_t s0, s1_q, s2_q, s3_q;
  logic  s2_hit_q, s3_hit_q;
  logic [LINE_SIZE*8-1:0] s3_line_q;
  logic [LINE_SIZE*8-1:0] fill_data_q;   // fill data travels beside the record

  // ---------------- storage ----------------
  logic [LINE_SIZE*8-1:0] data_mem [NUM_SETS];
  logic [LAW-1:0]         tag_mem  [NUM_SETS];
  logic [NUM_SETS-1:0]    vld_mem;

  function automatic logic [SB-1:0] set_of(logic [LAW-1:0] line);
    return SB'(line >> BANK_SHIFT);
  endfunction

  // ---------------- MSHR ----------------
  preq_t              mshr_req   [MSHR_SIZE];
  logic [MSHR_SIZE-1:0] mshr_vld, mshr_rdy;
  logic [$clog2(MSHR_SIZE+1)-1:0] mshr_free;
  logic               replay_avail;
  logic [MB-1:0]      replay_idx;

  always_comb begin
    mshr_free = '0;
    for (int i = 0; i < MSHR_SIZE; i++) mshr_free += {{($clog2(MSHR_SIZE+1)-1){1'b0}}, ~mshr_vld[i]};
    replay_avail = 1'b0;
    replay_idx   = '0;
    for (int i = MSHR_SIZE - 1; i >= 0; i--)
      if (mshr_vld[i] && mshr_rdy[i]) begin replay_avail = 1'b1; replay_idx = MB'(i); end
  end

  // ---------------- queues: response and memory request ----------------
  localparam int unsigned RQB = $clog2(RSPQ_SIZE + 1);
  localparam int unsigned MQB = $clog2(MEMQ_SIZE + 1);
  localparam int unsigned RQI = (RSPQ_SIZE > 1) ? $clog2(RSPQ_SIZE) : 1;   // queue slot index
  localparam int unsigned MQI = (MEMQ_SIZE > 1) ? $clog2(MEMQ_SIZE) : 1;

  typedef struct packed {
    logic [NUM_PORTS-1:0]      pmask;
    logic [NUM_PORTS*LB-1:0]   lanes;
    logic [NUM_PORTS*32-1:0]   data;
    logic [TAG_WIDTH-1:0]      tag;
  } rsp_t;

  typedef struct packed {
    logic                      rw;
    logic [LAW-1:0]            line;
    logic [OFFB-1:0]           off;
    logic [3:0]                byteen;
    logic [31:0]               data;
  } mreq_t;

  rsp_t  rspq [RSPQ_SIZE];
  logic [RQB-1:0] rspq_cnt;
  mreq_t memq [MEMQ_SIZE];
  logic [MQB-1:0] memq_cnt;

  // ---------------- S0: schedule ----------------
  logic sel_replay, sel_fill, sel_core;
  logic [2:0] reads_in_flight;
  logic core_ok;

  assign reads_in_flight = 3'(s1_q.valid && !s1_q.fill && !s1_q.rw) + 3'(s2_q.valid && !s2_q.fill && !s2_q.rw)
                         + 3'(s3_q.valid && !s3_q.fill && !s3_q.rw);
  assign core_ok = (mshr_free > (s1_q.valid ? 1 : 0))
                && (32'(rspq_cnt) + 32'(reads_in_flight) < RSPQ_SIZE)
                && (32'(memq_cnt) + (s1_q.valid ? 1 : 0) < MEMQ_SIZE);

  assign sel_replay = replay_avail && (32'(rspq_cnt) + 32'(reads_in_flight) < RSPQ_SIZE)
                   && (32'(memq_cnt) + (s1_q.valid ? 1 : 0) < MEMQ_SIZE);
  assign sel_fill   = !sel_replay && mem_rsp_valid;
  assign sel_core   = !sel_replay && !mem_rsp_valid && core_req_valid && core_ok;

  assign core_req_ready = sel_core;
  assign mem_rsp_ready  = sel_fill;

  always_comb begin
    s0 = '0;
    if (sel_replay) begin
      s0 = mshr_req[replay_idx];
      s0.valid = 1'b1;
    end else if (sel_fill) begin
      s0.valid = 1'b1;
      s0.fill  = 1'b1;
      s0.line  = mem_rsp_line;
    end else if (sel_core) begin
      s0.valid  = 1'b1;
      s0.rw     = core_req_rw;
      s0.line   = core_req_line;
      s0.pmask  = core_req_pmask;
      for (int p = 0; p < NUM_PORTS; p++) begin
        s0.lanes[p*LB +: LB]     = core_req_lane[p];
        s0.offs[p*OFFB +: OFFB]  = core_req_off[p];
      end
      s0.byteen = core_req_byteen;
      s0.wdata  = core_req_data;
      s0.tag    = core_req_tag;
    end
  end

  // ---------------- S1: tag access ----------------
  logic [SB-1:0] s1_set;
  logic          s1_hit, s1_pending, s1_alloc, s1_memrd, s1_memwr;
  logic [MB-1:0] alloc_idx;

  assign s1_set = set_of(s1_q.line);
  assign s1_hit = vld_mem[s1_set] && (tag_mem[s1_set] == s1_q.line);

  always_comb begin
    s1_pending = 1'b0;
    for (int i = 0; i < MSHR_SIZE; i++)
      if (mshr_vld[i] && !mshr_rdy[i] && mshr_req[i].line == s1_q.line) s1_pending = 1'b1;
    alloc_idx = '0;
    for (int i = MSHR_SIZE - 1; i >= 0; i--)
      if (!mshr_vld[i]) alloc_idx = MB'(i);
  end

  assign s1_alloc = s1_q.valid && !s1_q.fill && !s1_q.rw && !s1_hit;
  assign s1_memrd = s1_alloc && !s1_pending;
  assign s1_memwr = s1_q.valid && !s1_q.fill && s1_q.rw;

  // ---------------- S2: data access ----------------
  logic [SB-1:0] s2_set;
  assign s2_set = set_of(s2_q.line);

  // ---------------- sequential ----------------
  logic rsp_push, rsp_pop, mq_push, mq_pop;
  rsp_t rsp_in;
  mreq_t mq_in;

  assign rsp_push = s3_q.valid && !s3_q.fill && !s3_q.rw && s3_hit_q;
  assign rsp_pop  = core_rsp_valid && core_rsp_ready;
  assign mq_push  = s1_memrd || s1_memwr;
  assign mq_pop   = mem_req_valid && mem_req_ready;

  always_comb begin
    rsp_in.pmask = s3_q.pmask;
    rsp_in.lanes = s3_q.lanes;
    rsp_in.tag   = s3_q.tag;
    for (int p = 0; p < NUM_PORTS; p++)
      rsp_in.data[p*32 +: 32] = s3_line_q[32*s3_q.offs[p*OFFB +: OFFB] +: 32];
    mq_in.rw     = s1_q.rw;
    mq_in.line   = s1_q.line;
    mq_in.off    = s1_q.offs[OFFB-1:0];
    mq_in.byteen = s1_q.byteen;
    mq_in.data   = s1_q.wdata;
  end

  always_ff @(posedge clk) begin
    if (reset) begin
      s1_q <= '0; s2_q <= '0; s3_q <= '0;
      s2_hit_q <= 1'b0; s3_hit_q <= 1'b0;
      vld_mem  <= '0;
      mshr_vld <= '0; mshr_rdy <= '0;
      rspq_cnt <= '0; memq_cnt <= '0;
    end else begin
      // pipeline advance (never stalls: admission guarantees room)
      s1_q <= s0;
      s2_q <= s1_q;
      s3_q <= s2_q;
      s2_hit_q <= s1_hit || s1_q.fill;
      s3_hit_q <= s2_hit_q;

      // S0: a replay frees its MSHR entry
      if (sel_replay) mshr_vld[replay_idx] <= 1'b0;

      // S1: tag update by fill, MSHR allocation
      if (s1_q.valid && s1_q.fill) begin
        tag_mem[s1_set] <= s1_q.line;
        vld_mem[s1_set] <= 1'b1;
      end
      if (s1_alloc) begin
        mshr_vld[alloc_idx] <= 1'b1;
        mshr_rdy[alloc_idx] <= 1'b0;
        mshr_req[alloc_idx] <= s1_q;
      end

      // S2: data store
      if (s2_q.valid && s2_q.fill) begin
        data_mem[s2_set] <= fill_data_q;
        for (int i = 0; i < MSHR_SIZE; i++)
          if (mshr_vld[i] && mshr_req[i].line == s2_q.line) mshr_rdy[i] <= 1'b1;
      end else if (s2_q.valid && s2_q.rw && s2_hit_q) begin
        for (int b = 0; b < 4; b++)
          if (s2_q.byteen[b])
            data_mem[s2_set][32*s2_q.offs[OFFB-1:0] + 8*b +: 8] <= s2_q.wdata[8*b +: 8];
      end
      s3_line_q <= data_mem[s2_set];

      // response queue (shift-register FIFO)
      if (rsp_pop) begin
        for (int i = 0; i < RSPQ_SIZE - 1; i++) rspq[i] <= rspq[i+1];
      end
      if (rsp_push) rspq[RQI'(rspq_cnt - RQB'(rsp_pop))] <= rsp_in;
      rspq_cnt <= rspq_cnt + RQB'(rsp_push) - RQB'(rsp_pop);

      // memory request queue
      if (mq_pop) begin
        for (int i = 0; i < MEMQ_SIZE - 1; i++) memq[i] <= memq[i+1];
      end
      if (mq_push) memq[MQI'(memq_cnt - MQB'(mq_pop))] <= mq_in;
      memq_cnt <= memq_cnt + MQB'(mq_push) - MQB'(mq_pop);
    end
  end

  // fill data rides with the fill through S1 into S2
  logic [LINE_SIZE*8-1:0] fill_data_s1;
  always_ff @(posedge clk) begin
    if (sel_fill) fill_data_s1 <= mem_rsp_data;
    fill_data_q <= fill_data_s1;
  end

  // ---------------- outputs ----------------
  assign core_rsp_valid = (rspq_cnt != '0);
  assign core_rsp_pmask = rspq[0].pmask;
  assign core_rsp_tag   = rspq[0].tag;
  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_rsp
    assign core_rsp_lane[p] = rspq[0].lanes[p*LB +: LB];
    assign core_rsp_data[p] = rspq[0].data[p*32 +: 32];
  end

  assign mem_req_valid = (memq_cnt != '0);
  assign mem_req_rw    = memq[0].rw;
  assign mem_req_line  = memq[0].line;
  always_comb begin
    mem_req_data   = '0;
    mem_req_byteen = '0;
    if (memq[0].rw) begin
      mem_req_data[32*memq[0].off +: 32]  = memq[0].data;
      mem_req_byteen[4*memq[0].off +: 4]  = memq[0].byteen;
    end
  end

  assign idle = !s1_q.valid && !s2_q.valid && !s3_q.valid && (mshr_vld == '0)
             && (rspq_cnt == '0) && (memq_cnt == '0);

  // the early-full admission must keep every queue within its size
  always_ff @(posedge clk) begin
    if (!reset) begin
      assert (!(rsp_push && !rsp_pop && rspq_cnt == RQB'(RSPQ_SIZE))) else $error("cache response queue overflow");
      assert (!(mq_push && !mq_pop && memq_cnt == MQB'(MEMQ_SIZE))) else $error("cache memory queue overflow");
      assert (!(s1_alloc && mshr_vld == '1)) else $error("MSHR overflow");
    end
  end
endmodule
