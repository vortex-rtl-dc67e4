// vx_core: one SIMT core.
//
// Five stages, in order:
//   fetch   - vx_warp_sched picks a wavefront and sends (PC, wavefront,
//             thread mask) as the tag of an instruction-cache request
//             (vx_cache with one lane, one bank);
//   decode  - vx_decode on the cache response; ordinary instructions release
//             their wavefront at once, control instructions keep it stalled;
//             the decoded instruction enters the wavefront's vx_ibuffer queue;
//   issue   - each cycle one ibuffer head is considered (rotating start);
//             it issues if vx_scoreboard reports no hazard and its unit is
//             free; operands are read from vx_gpr in the same cycle;
//   execute - ALU (vx_alu, result registered, branch outcome sent to the
//             scheduler), GPU unit (vx_gpu_unit: tmc/wspawn/split/join/bar
//             applied to the scheduler in the issue cycle; bar goes to the
//             local barrier table vx_barrier or, when the MSB of the id is
//             set, out to the processor's global table), CSR unit, LSU
//             (vx_lsu with the data cache and vx_smem) and texture unit
//             (vx_tex_unit); the LSU and the texture unit share the data
//             cache through a request arbiter that gives the LSU priority and
//             routes responses by the top tag bit;
//   commit  - vx_writeback writes one result per cycle into the GPRs and
//             clears the scoreboard.
// The I-cache and D-cache memory ports are merged by vx_mem_arb into the
// core's single line-wide memory port, whose tag carries the line address.
// busy is high while any wavefront is active or any memory operation is
// unfinished. The structure follows the design's core diagram; the
// stall-until-resolved branch handling, one-at-a-time LSU and arbitration
// orders are this implementation's choices.
module vx_core
  import vx_pkg::*;
#(
  parameter int unsigned NUM_WARPS     = 4,
  parameter int unsigned NUM_THREADS   = 4,
  parameter int unsigned NUM_CORES     = 1,
  parameter int unsigned CORE_ID       = 0,
  parameter logic [31:0] STARTUP_ADDR  = 32'h8000_0000,
  parameter int unsigned ICACHE_SIZE   = 16384,
  parameter int unsigned DCACHE_SIZE   = 16384,
  parameter int unsigned DCACHE_BANKS  = 4,
  parameter int unsigned DCACHE_PORTS  = 2,
  parameter int unsigned SMEM_SIZE     = 16384,
  parameter int unsigned LINE_SIZE     = 64,
  parameter int unsigned NUM_BARRIERS  = 4,
  parameter int unsigned GBAR_WAITERS  = NUM_CORES * NUM_WARPS,
  localparam int unsigned WB   = (NUM_WARPS > 1) ? $clog2(NUM_WARPS) : 1,
  localparam int unsigned LAW  = 32 - $clog2(LINE_SIZE),
  localparam int unsigned MTW  = LAW + 1,                 // memory tag width
  localparam int unsigned BIDW = (NUM_BARRIERS > 1) ? $clog2(NUM_BARRIERS) : 1,
  localparam int unsigned GCW  = $clog2(GBAR_WAITERS + 1)
) (
  input  logic                   clk,
  input  logic                   reset,
  // memory port
  output logic                   mem_req_valid,
  input  logic                   mem_req_ready,
  output logic                   mem_req_rw,
  output logic [LAW-1:0]         mem_req_addr,
  output logic [LINE_SIZE*8-1:0] mem_req_data,
  output logic [LINE_SIZE-1:0]   mem_req_byteen,
  output logic [MTW-1:0]         mem_req_tag,
  input  logic                   mem_rsp_valid,
  output logic                   mem_rsp_ready,
  input  logic [LINE_SIZE*8-1:0] mem_rsp_data,
  input  logic [MTW-1:0]         mem_rsp_tag,
  // global barrier
  output logic                   gbar_req_valid,
  input  logic                   gbar_req_ready,
  output logic [BIDW-1:0]        gbar_req_id,
  output logic [GCW-1:0]         gbar_req_count,
  output logic [WB-1:0]          gbar_req_wid,
  input  logic                   gbar_rel_valid,
  input  logic [NUM_WARPS-1:0]   gbar_rel_mask,
  // status
  output logic                   busy
);
  localparam int unsigned NT = NUM_THREADS;
  localparam int unsigned ITW = WB + NT + 32;        // icache tag: wid, tmask, pc
  localparam int unsigned DTW = 1 + WB;              // dcache tag: source, wid

  // ======================= fetch =======================
  logic          if_valid, if_ready;
  logic [31:0]   if_pc;
  logic [WB-1:0] if_wid;
  logic [NT-1:0] if_tmask;

  logic          unstall_valid;
  logic [WB-1:0] unstall_wid;
  logic          br_valid_q, br_taken_q;
  logic [WB-1:0] br_wid_q;
  logic [31:0]   br_dest_q;

  logic          gpu_valid;
  logic [WB-1:0] gpu_wid;
  logic          tmc_v, wsp_v, spl_v, spl_div, join_v, bar_v, bar_gl;
  logic [NT-1:0] tmc_mask, spl_t, spl_nt;
  logic [NUM_WARPS-1:0] wsp_mask;
  logic [31:0]   wsp_pc, spl_pc, bar_count;
  logic [BIDW-1:0] bar_id;
  logic          lbar_rel_valid;
  logic [NUM_WARPS-1:0] lbar_rel_mask, active_mask, barrier_mask;
  logic          sched_busy, ipdom_full;

  vx_warp_sched #(.NUM_WARPS(NUM_WARPS), .NUM_THREADS(NT), .STARTUP_ADDR(STARTUP_ADDR)) u_sched (
    .clk, .reset,
    .ifetch_valid (if_valid), .ifetch_ready (if_ready), .ifetch_pc (if_pc),
    .ifetch_wid (if_wid), .ifetch_tmask (if_tmask),
    .unstall_valid, .unstall_wid,
    .br_valid (br_valid_q), .br_wid (br_wid_q), .br_taken (br_taken_q), .br_dest (br_dest_q),
    .tmc_valid (tmc_v), .tmc_wid (gpu_wid), .tmc_tmask (tmc_mask),
    .wspawn_valid (wsp_v), .wspawn_wid (gpu_wid), .wspawn_mask (wsp_mask), .wspawn_pc (wsp_pc),
    .split_valid (spl_v), .split_wid (gpu_wid), .split_diverged (spl_div),
    .split_taken (spl_t), .split_ntaken (spl_nt), .split_pc (spl_pc),
    .join_valid (join_v), .join_wid (gpu_wid),
    .bar_valid (bar_v), .bar_wid (gpu_wid),
    .bar_release_valid (lbar_rel_valid || gbar_rel_valid),
    .bar_release_mask ((lbar_rel_valid ? lbar_rel_mask : '0) | (gbar_rel_valid ? gbar_rel_mask : '0)),
    .active_mask, .barrier_mask, .ipdom_full,
    .busy (sched_busy)
  );

  // ======================= instruction cache =======================
  logic [0:0]     ic_req_valid, ic_req_ready, ic_rsp_mask;
  logic [31:0]    ic_req_addr [1], ic_req_data [1], ic_rsp_data [1];
  logic [3:0]     ic_req_be [1];
  logic           ic_rsp_valid, ic_rsp_ready, ic_idle;
  logic [ITW-1:0] ic_rsp_tag;
  logic           icm_req_valid, icm_req_ready, icm_req_rw, icm_rsp_valid, icm_rsp_ready;
  logic [LAW-1:0] icm_req_addr;
  logic [LINE_SIZE*8-1:0] icm_req_data;
  logic [LINE_SIZE-1:0]   icm_req_be;

  assign ic_req_valid[0] = if_valid;
  assign if_ready        = ic_req_ready[0];
  assign ic_req_addr[0]  = if_pc;
  assign ic_req_data[0]  = '0;
  assign ic_req_be[0]    = '0;

  vx_cache #(.CACHE_SIZE(ICACHE_SIZE), .LINE_SIZE(LINE_SIZE), .NUM_BANKS(1), .NUM_PORTS(1),
             .NUM_REQS(1), .TAG_WIDTH(ITW), .MSHR_SIZE(NUM_WARPS)) u_icache (
    .clk, .reset,
    .core_req_valid (ic_req_valid), .core_req_ready (ic_req_ready), .core_req_rw (1'b0),
    .core_req_addr (ic_req_addr), .core_req_byteen (ic_req_be), .core_req_data (ic_req_data),
    .core_req_tag ({if_wid, if_tmask, if_pc}),
    .core_rsp_valid (ic_rsp_valid), .core_rsp_ready (ic_rsp_ready), .core_rsp_mask (ic_rsp_mask),
    .core_rsp_data (ic_rsp_data), .core_rsp_tag (ic_rsp_tag),
    .mem_req_valid (icm_req_valid), .mem_req_ready (icm_req_ready), .mem_req_rw (icm_req_rw),
    .mem_req_addr (icm_req_addr), .mem_req_data (icm_req_data), .mem_req_byteen (icm_req_be),
    .mem_rsp_valid (icm_rsp_valid), .mem_rsp_ready (icm_rsp_ready),
    .mem_rsp_addr (mem_rsp_tag[MTW-1:1]), .mem_rsp_data (mem_rsp_data),
    .idle (ic_idle)
  );

  // ======================= decode =======================
  dec_instr_t    dec;
  logic [31:0]   dc_pc;
  logic [WB-1:0] dc_wid;
  logic [NT-1:0] dc_tmask;
  assign {dc_wid, dc_tmask, dc_pc} = ic_rsp_tag;

  vx_decode u_decode (.instr (ic_rsp_data[0]), .dec);

  typedef struct packed {
    dec_instr_t    dec;
    logic [31:0]   pc;
    logic [NT-1:0] tmask;
  } ibuf_t;

  ibuf_t                ib_in;
  logic                 ib_in_ready;
  logic [NUM_WARPS-1:0] ib_out_valid, ib_out_ready;
  logic [$bits(ibuf_t)-1:0] ib_out_data [NUM_WARPS];

  assign ib_in = '{dec: dec, pc: dc_pc, tmask: dc_tmask};
  assign ic_rsp_ready  = ib_in_ready;
  assign unstall_valid = ic_rsp_valid && ib_in_ready && !dec.is_ctrl;
  assign unstall_wid   = dc_wid;

  vx_ibuffer #(.NUM_WARPS(NUM_WARPS), .DATAW($bits(ibuf_t))) u_ibuffer (
    .clk, .reset,
    .in_valid (ic_rsp_valid), .in_ready (ib_in_ready), .in_wid (dc_wid), .in_data (ib_in),
    .out_valid (ib_out_valid), .out_ready (ib_out_ready), .out_data (ib_out_data)
  );

  // ======================= issue =======================
  logic [WB-1:0] rr_q, is_wid;
  logic          is_valid;
  ibuf_t         is_i;

  always_comb begin
    is_valid = 1'b0;
    is_wid   = rr_q;
    for (int k = NUM_WARPS - 1; k >= 0; k--) begin
      int unsigned w;
      w = (int'(rr_q) + k) % NUM_WARPS;
      if (ib_out_valid[w]) begin is_valid = 1'b1; is_wid = WB'(w); end
    end
  end
  assign is_i = ib_out_data[is_wid];

  logic sb_busy, is_fire;
  logic wb_valid, wb_write;
  logic [WB-1:0] wb_wid;
  logic [4:0]    wb_rd;
  logic [NT-1:0] wb_tmask;
  logic [31:0]   wb_data [NT];

  vx_scoreboard #(.NUM_WARPS(NUM_WARPS)) u_sb (
    .clk, .reset,
    .chk_wid (is_wid), .chk_rs1 (is_i.dec.rs1), .chk_rs2 (is_i.dec.rs2), .chk_rs3 (is_i.dec.rs3),
    .chk_rd (is_i.dec.rd), .chk_use_rs1 (is_i.dec.use_rs1), .chk_use_rs2 (is_i.dec.use_rs2),
    .chk_use_rs3 (is_i.dec.use_rs3), .chk_wb (is_i.dec.wb), .busy (sb_busy),
    .set_valid (is_fire && is_i.dec.wb), .set_wid (is_wid), .set_rd (is_i.dec.rd),
    .clr_valid (wb_valid && wb_write), .clr_wid (wb_wid), .clr_rd (wb_rd)
  );

  logic [31:0] rs1_d [NT], rs2_d [NT], rs3_d [NT];
  vx_gpr #(.NUM_WARPS(NUM_WARPS), .NUM_THREADS(NT)) u_gpr (
    .clk, .reset, .rd_wid (is_wid), .rs1 (is_i.dec.rs1), .rs2 (is_i.dec.rs2), .rs3 (is_i.dec.rs3),
    .rs1_data (rs1_d), .rs2_data (rs2_d), .rs3_data (rs3_d),
    .wr_valid (wb_valid && wb_write), .wr_wid (wb_wid), .wr_rd (wb_rd), .wr_tmask (wb_tmask), .wr_data (wb_data)
  );

  // unit availability
  logic alu_q_valid, csr_q_valid, lsu_ready, tex_ready, gbar_pend_q;
  logic unit_ok;
  always_comb begin
    unique case (is_i.dec.unit)
      EX_ALU:  unit_ok = !alu_q_valid;
      EX_CSR:  unit_ok = !csr_q_valid;
      EX_LSU:  unit_ok = lsu_ready;
      EX_TEX:  unit_ok = tex_ready;
      EX_GPU:  unit_ok = !gbar_pend_q && !ipdom_full;
      default: unit_ok = 1'b1;
    endcase
  end
  assign is_fire = is_valid && !sb_busy && unit_ok;
  always_comb begin
    ib_out_ready = '0;
    ib_out_ready[is_wid] = is_fire;
  end

  always_ff @(posedge clk) begin
    if (reset) rr_q <= '0;
    else       rr_q <= (rr_q == WB'(NUM_WARPS - 1)) ? '0 : rr_q + 1'b1;
  end

  // ======================= execute: ALU =======================
  logic [31:0] alu_res [NT];
  logic        alu_br_taken;
  logic [31:0] alu_br_dest;
  vx_alu #(.NUM_THREADS(NT)) u_alu (
    .alu_op (is_i.dec.alu_op), .br_op (is_i.dec.br_op), .is_jalr (is_i.dec.is_jalr),
    .use_pc (is_i.dec.use_pc), .use_imm (is_i.dec.use_imm), .imm (is_i.dec.imm), .pc (is_i.pc),
    .tmask (is_i.tmask), .rs1_data (rs1_d), .rs2_data (rs2_d),
    .result (alu_res), .br_taken (alu_br_taken), .br_dest (alu_br_dest)
  );

  logic [WB-1:0] alu_wid_q;  logic [4:0] alu_rd_q; logic [NT-1:0] alu_tmask_q; logic alu_wb_q;
  logic [31:0]   alu_data_q [NT];
  logic [3:0]    wbk_ready;
  logic          alu_fire;
  assign alu_fire = is_fire && is_i.dec.unit == EX_ALU;

  always_ff @(posedge clk) begin
    if (reset) begin
      alu_q_valid <= 1'b0;
      br_valid_q  <= 1'b0;
    end else begin
      if (wbk_ready[3]) alu_q_valid <= 1'b0;
      if (alu_fire) begin
        alu_q_valid <= 1'b1;
        alu_wid_q   <= is_wid;
        alu_rd_q    <= is_i.dec.rd;
        alu_tmask_q <= is_i.tmask;
        alu_wb_q    <= is_i.dec.wb;
        alu_data_q  <= alu_res;
      end
      br_valid_q <= alu_fire && is_i.dec.is_ctrl;
      br_wid_q   <= is_wid;
      br_taken_q <= alu_br_taken;
      br_dest_q  <= alu_br_dest;
    end
  end

  // ======================= execute: GPU =======================
  assign gpu_valid = is_fire && is_i.dec.unit == EX_GPU;
  assign gpu_wid   = is_wid;
  logic [2:0] bar_id_full;
  vx_gpu_unit #(.NUM_WARPS(NUM_WARPS), .NUM_THREADS(NT), .BAR_ID_BITS(BIDW + 1)) u_gpu (
    .valid (gpu_valid), .func3 (is_i.dec.func3), .pc (is_i.pc), .tmask (is_i.tmask),
    .rs1_data (rs1_d), .rs2_data (rs2_d),
    .tmc_valid (tmc_v), .tmc_tmask (tmc_mask),
    .wspawn_valid (wsp_v), .wspawn_mask (wsp_mask), .wspawn_pc (wsp_pc),
    .split_valid (spl_v), .split_diverged (spl_div), .split_taken (spl_t), .split_ntaken (spl_nt),
    .split_pc (spl_pc), .join_valid (join_v),
    .bar_valid (bar_v), .bar_global (bar_gl), .bar_id (bar_id), .bar_count (bar_count)
  );
  assign bar_id_full = '0;

  vx_barrier #(.NUM_BARRIERS(NUM_BARRIERS), .NUM_WAITERS(NUM_WARPS)) u_lbar (
    .clk, .reset,
    .req_valid (bar_v && !bar_gl), .req_id (bar_id), .req_count ($clog2(NUM_WARPS + 1)'(bar_count)),
    .req_waiter (gpu_wid), .rel_valid (lbar_rel_valid), .rel_mask (lbar_rel_mask)
  );

  always_ff @(posedge clk) begin
    if (reset) gbar_pend_q <= 1'b0;
    else if (bar_v && bar_gl) begin
      gbar_pend_q    <= 1'b1;
      gbar_req_id    <= bar_id;
      gbar_req_count <= GCW'(bar_count);
      gbar_req_wid   <= gpu_wid;
    end else if (gbar_req_ready) gbar_pend_q <= 1'b0;
  end
  assign gbar_req_valid = gbar_pend_q;

  // ======================= execute: CSR =======================
  logic [31:0] csr_res [NT];
  logic [31:0] tex_state [TEX_CSR_MIPOFF + TEX_LOD_LEVELS];
  logic        csr_fire;
  assign csr_fire = is_fire && is_i.dec.unit == EX_CSR;
  vx_csr_unit #(.NUM_WARPS(NUM_WARPS), .NUM_THREADS(NT), .NUM_CORES(NUM_CORES), .CORE_ID(CORE_ID)) u_csr (
    .clk, .reset, .req_valid (csr_fire), .req_wid (is_wid), .req_tmask (is_i.tmask),
    .req_func3 (is_i.dec.func3), .req_addr (is_i.dec.imm[11:0]), .req_zimm (is_i.dec.rs1),
    .req_rs1 (rs1_d), .rsp_data (csr_res), .tex_state
  );
  logic [WB-1:0] csr_wid_q; logic [4:0] csr_rd_q; logic [NT-1:0] csr_tmask_q; logic csr_wb_q;
  logic [31:0]   csr_data_q [NT];
  always_ff @(posedge clk) begin
    if (reset) csr_q_valid <= 1'b0;
    else begin
      if (wbk_ready[2]) csr_q_valid <= 1'b0;
      if (csr_fire) begin
        csr_q_valid <= 1'b1;
        csr_wid_q   <= is_wid;
        csr_rd_q    <= is_i.dec.rd;
        csr_tmask_q <= is_i.tmask;
        csr_wb_q    <= is_i.dec.wb;
        csr_data_q  <= csr_res;
      end
    end
  end

  // ======================= execute: LSU, shared memory, data cache =======================
  logic [NT-1:0] lsu_dc_valid, lsu_dc_ready, lsu_sm_valid, sm_ready, sm_rsp_mask, dc_rsp_mask;
  logic          lsu_dc_rw, sm_rsp_valid, dc_rsp_valid, lsu_rsp_valid, lsu_rsp_wb;
  logic [31:0]   lsu_addr [NT], lsu_wdata [NT], sm_rsp_data [NT], dc_rsp_data [NT], lsu_rsp_data [NT];
  logic [3:0]    lsu_be [NT];
  logic [WB-1:0] lsu_rsp_wid; logic [4:0] lsu_rsp_rd; logic [NT-1:0] lsu_rsp_tmask;
  logic [DTW-1:0] dc_rsp_tag;

  vx_lsu #(.NUM_THREADS(NT), .WB(WB), .SMEM_SIZE(SMEM_SIZE)) u_lsu (
    .clk, .reset,
    .req_valid (is_fire && is_i.dec.unit == EX_LSU), .req_ready (lsu_ready), .req_wid (is_wid),
    .req_tmask (is_i.tmask), .req_store (is_i.dec.is_store), .req_func3 (is_i.dec.func3),
    .req_rd (is_i.dec.rd), .req_wb (is_i.dec.wb), .req_imm (is_i.dec.imm),
    .req_base (rs1_d), .req_wdata (rs2_d),
    .dc_req_valid (lsu_dc_valid), .dc_req_ready (lsu_dc_ready), .dc_req_rw (lsu_dc_rw),
    .dc_req_addr (lsu_addr), .dc_req_byteen (lsu_be), .dc_req_data (lsu_wdata),
    .dc_rsp_valid (dc_rsp_valid && !dc_rsp_tag[DTW-1]), .dc_rsp_mask (dc_rsp_mask), .dc_rsp_data (dc_rsp_data),
    .sm_req_valid (lsu_sm_valid), .sm_req_ready (sm_ready),
    .sm_rsp_valid, .sm_rsp_mask, .sm_rsp_data,
    .rsp_valid (lsu_rsp_valid), .rsp_ready (wbk_ready[0]), .rsp_wid (lsu_rsp_wid),
    .rsp_tmask (lsu_rsp_tmask), .rsp_rd (lsu_rsp_rd), .rsp_wb (lsu_rsp_wb), .rsp_data (lsu_rsp_data)
  );

  logic [31:0] sm_addr [NT];
  for (genvar t = 0; t < NT; t++) begin : g_smaddr
    assign sm_addr[t] = lsu_addr[t] - 32'hFF00_0000;
  end
  vx_smem #(.SMEM_SIZE(SMEM_SIZE), .NUM_THREADS(NT)) u_smem (
    .clk, .reset, .req_valid (lsu_sm_valid), .req_ready (sm_ready), .req_rw (lsu_dc_rw),
    .req_addr (sm_addr), .req_byteen (lsu_be), .req_data (lsu_wdata),
    .rsp_valid (sm_rsp_valid), .rsp_mask (sm_rsp_mask), .rsp_data (sm_rsp_data)
  );

  // texture unit
  logic [NT-1:0] dc_req_ready;
  logic [NT-1:0] tex_dc_valid;
  logic [31:0]   tex_dc_addr [NT], tex_rsp_data [NT];
  logic          tex_rsp_valid;
  logic [WB-1:0] tex_rsp_wid; logic [4:0] tex_rsp_rd; logic [NT-1:0] tex_rsp_tmask;

  vx_tex_unit #(.NUM_THREADS(NT), .WB(WB)) u_tex (
    .clk, .reset, .tex_state,
    .req_valid (is_fire && is_i.dec.unit == EX_TEX), .req_ready (tex_ready), .req_wid (is_wid),
    .req_tmask (is_i.tmask), .req_rd (is_i.dec.rd), .req_u (rs1_d), .req_v (rs2_d), .req_lod (rs3_d),
    .dc_req_valid (tex_dc_valid), .dc_req_ready (lsu_dc_valid == '0 ? dc_req_ready : '0),
    .dc_req_addr (tex_dc_addr),
    .dc_rsp_valid (dc_rsp_valid && dc_rsp_tag[DTW-1]), .dc_rsp_mask (dc_rsp_mask), .dc_rsp_data (dc_rsp_data),
    .rsp_valid (tex_rsp_valid), .rsp_ready (wbk_ready[1]), .rsp_wid (tex_rsp_wid),
    .rsp_tmask (tex_rsp_tmask), .rsp_rd (tex_rsp_rd), .rsp_data (tex_rsp_data)
  );

  // data cache arbiter: LSU first, texture unit when the LSU is silent
  logic          use_lsu;
  logic [NT-1:0] dc_req_valid;
  logic [31:0]   dc_req_addr [NT];
  logic [DTW-1:0] dc_req_tag;
  logic          dc_idle;
  logic          dcm_req_valid, dcm_req_ready, dcm_req_rw, dcm_rsp_valid, dcm_rsp_ready;
  logic [LAW-1:0] dcm_req_addr;
  logic [LINE_SIZE*8-1:0] dcm_req_data;
  logic [LINE_SIZE-1:0]   dcm_req_be;

  assign use_lsu      = (lsu_dc_valid != '0);
  assign dc_req_valid = use_lsu ? lsu_dc_valid : tex_dc_valid;
  assign dc_req_addr  = use_lsu ? lsu_addr : tex_dc_addr;
  assign dc_req_tag   = {!use_lsu, WB'(0)};
  assign lsu_dc_ready = use_lsu ? dc_req_ready : '0;

  vx_cache #(.CACHE_SIZE(DCACHE_SIZE), .LINE_SIZE(LINE_SIZE), .NUM_BANKS(DCACHE_BANKS),
             .NUM_PORTS(DCACHE_PORTS), .NUM_REQS(NT), .TAG_WIDTH(DTW)) u_dcache (
    .clk, .reset,
    .core_req_valid (dc_req_valid), .core_req_ready (dc_req_ready), .core_req_rw (use_lsu && lsu_dc_rw),
    .core_req_addr (dc_req_addr), .core_req_byteen (lsu_be), .core_req_data (lsu_wdata),
    .core_req_tag (dc_req_tag),
    .core_rsp_valid (dc_rsp_valid), .core_rsp_ready (1'b1), .core_rsp_mask (dc_rsp_mask),
    .core_rsp_data (dc_rsp_data), .core_rsp_tag (dc_rsp_tag),
    .mem_req_valid (dcm_req_valid), .mem_req_ready (dcm_req_ready), .mem_req_rw (dcm_req_rw),
    .mem_req_addr (dcm_req_addr), .mem_req_data (dcm_req_data), .mem_req_byteen (dcm_req_be),
    .mem_rsp_valid (dcm_rsp_valid), .mem_rsp_ready (dcm_rsp_ready),
    .mem_rsp_addr (mem_rsp_tag[MTW-1:1]), .mem_rsp_data (mem_rsp_data),
    .idle (dc_idle)
  );

  // ======================= memory port =======================
  logic [1:0] arb_rsp_valid;
  logic [LINE_SIZE*8-1:0] arb_rsp_data;
  logic [LAW-1:0] arb_rsp_tag;
  vx_mem_arb #(.NUM_INPUTS(2), .ADDR_WIDTH(LAW), .DATA_WIDTH(LINE_SIZE*8), .TAG_WIDTH(LAW)) u_marb (
    .clk, .reset,
    .in_req_valid ({dcm_req_valid, icm_req_valid}), .in_req_ready ({dcm_req_ready, icm_req_ready}),
    .in_req_rw ({dcm_req_rw, icm_req_rw}), .in_req_addr ('{icm_req_addr, dcm_req_addr}),
    .in_req_data ('{icm_req_data, dcm_req_data}), .in_req_byteen ('{icm_req_be, dcm_req_be}),
    .in_req_tag ('{icm_req_addr, dcm_req_addr}),
    .in_rsp_valid (arb_rsp_valid), .in_rsp_ready ({dcm_rsp_ready, icm_rsp_ready}),
    .in_rsp_data (arb_rsp_data), .in_rsp_tag (arb_rsp_tag),
    .out_req_valid (mem_req_valid), .out_req_ready (mem_req_ready), .out_req_rw (mem_req_rw),
    .out_req_addr (mem_req_addr), .out_req_data (mem_req_data), .out_req_byteen (mem_req_byteen),
    .out_req_tag (mem_req_tag),
    .out_rsp_valid (mem_rsp_valid), .out_rsp_ready (mem_rsp_ready), .out_rsp_data (mem_rsp_data),
    .out_rsp_tag (mem_rsp_tag)
  );
  assign {dcm_rsp_valid, icm_rsp_valid} = arb_rsp_valid;

  // ======================= commit =======================
  logic [3:0]    wbk_valid, wbk_wb;
  logic [WB-1:0] wbk_wid [4];
  logic [4:0]    wbk_rd [4];
  logic [NT-1:0] wbk_tmask [4];
  logic [31:0]   wbk_data [4][NT];
  assign wbk_valid = {alu_q_valid, csr_q_valid, tex_rsp_valid, lsu_rsp_valid};
  assign wbk_wb    = {alu_wb_q, csr_wb_q, 1'b1, lsu_rsp_wb};
  assign wbk_wid   = '{lsu_rsp_wid, tex_rsp_wid, csr_wid_q, alu_wid_q};
  assign wbk_rd    = '{lsu_rsp_rd, tex_rsp_rd, csr_rd_q, alu_rd_q};
  assign wbk_tmask = '{lsu_rsp_tmask, tex_rsp_tmask, csr_tmask_q, alu_tmask_q};
  assign wbk_data  = '{lsu_rsp_data, tex_rsp_data, csr_data_q, alu_data_q};

  vx_writeback #(.NUM_INPUTS(4), .NUM_THREADS(NT), .WB(WB)) u_wb (
    .in_valid (wbk_valid), .in_ready (wbk_ready), .in_wid (wbk_wid), .in_rd (wbk_rd),
    .in_tmask (wbk_tmask), .in_wb (wbk_wb), .in_data (wbk_data),
    .wb_valid, .wb_write, .wb_wid, .wb_rd, .wb_tmask, .wb_data
  );

  assign busy = sched_busy || !ic_idle || !dc_idle || !lsu_ready || !tex_ready
             || alu_q_valid || csr_q_valid || gbar_pend_q || (barrier_mask != '0);
endmodule
