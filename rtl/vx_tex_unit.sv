// vx_tex_unit: texture sampling unit executing the tex instruction.
//
// A request carries, per thread, the normalized coordinates u and v
// (unsigned fixed point with TEX_FRAC fraction bits, 1.0 = 1<<TEX_FRAC) and
// the mip level lod. It passes through the stages of the design:
//   (0) texture state: base address, format, wrap, filter, log2 size and
//       per-level mip offsets are read from the CSR unit;
//   (1) address generation: for each thread the four texel addresses of the
//       2x2 quad around (u*W-0.5, v*H-0.5) and the 8-bit blend weights
//       (point filtering: the texel at (u*W, v*H), weights 0), with clamp or
//       repeat wrapping at the level's size;
//   (2) de-duplication: of the 4*NUM_THREADS word addresses only the first
//       occurrence of each is fetched;
//   (3) texel memory scheduler: unique words are sent to the data cache, slot
//       k on lane k mod NUM_THREADS, one outstanding word per lane; the batch
//       is complete only when every word has returned, and only then is the
//       next request accepted;
//   (4) duplication: every slot takes the word of its first occurrence;
//   (5) sampler: format conversion and two-cycle bilinear blend
//       (vx_tex_sampler), giving one RGBA8 color per thread.
// The stages follow the design. Coordinate format, wrap modes (clamp,
// repeat), formats (RGBA8, RGB565, L8) and the data-cache lane mapping are
// this implementation's choices. Texels must not straddle a 32-bit word.
module vx_tex_unit
  import vx_pkg::*;
#(
  parameter int unsigned NUM_THREADS = 4,
  parameter int unsigned WB          = 2
) (
  input  logic                   clk,
  input  logic                   reset,
  input  logic [31:0]            tex_state [TEX_CSR_MIPOFF + TEX_LOD_LEVELS],
  input  logic                   req_valid,
  output logic                   req_ready,
  input  logic [WB-1:0]          req_wid,
  input  logic [NUM_THREADS-1:0] req_tmask,
  input  logic [4:0]             req_rd,
  input  logic [31:0]            req_u   [NUM_THREADS],
  input  logic [31:0]            req_v   [NUM_THREADS],
  input  logic [31:0]            req_lod [NUM_THREADS],
  // data cache
  output logic [NUM_THREADS-1:0] dc_req_valid,
  input  logic [NUM_THREADS-1:0] dc_req_ready,
  output logic [31:0]            dc_req_addr [NUM_THREADS],
  input  logic                   dc_rsp_valid,
  input  logic [NUM_THREADS-1:0] dc_rsp_mask,
  input  logic [31:0]            dc_rsp_data [NUM_THREADS],
  // result
  output logic                   rsp_valid,
  input  logic                   rsp_ready,
  output logic [WB-1:0]          rsp_wid,
  output logic [NUM_THREADS-1:0] rsp_tmask,
  output logic [4:0]             rsp_rd,
  output logic [31:0]            rsp_data [NUM_THREADS]
);
  localparam int unsigned NS  = 4 * NUM_THREADS;          // texel slots
  localparam int unsigned SLB = $clog2(NS);

  typedef enum logic [2:0] { S_IDLE, S_ADDR, S_FETCH, S_SAMPLE, S_WAIT, S_DONE } state_e;
  state_e state_q;

  // ---------------- (0) texture state ----------------
  logic [31:0] st_addr;
  logic [1:0]  st_fmt;
  logic        st_wrap, st_filter;
  logic [4:0]  st_wlog, st_hlog;
  assign st_addr   = tex_state[TEX_CSR_ADDR];
  assign st_fmt    = tex_state[TEX_CSR_FORMAT][1:0];
  assign st_wrap   = tex_state[TEX_CSR_WRAP][0];
  assign st_filter = tex_state[TEX_CSR_FILTER][0];
  assign st_wlog   = tex_state[TEX_CSR_WIDTH][4:0];
  assign st_hlog   = tex_state[TEX_CSR_HEIGHT][4:0];

  logic [1:0] bpp_log;   // log2 bytes per texel
  assign bpp_log = (st_fmt == TEX_FMT_RGBA8) ? 2'd2 : ((st_fmt == TEX_FMT_RGB565) ? 2'd1 : 2'd0);

  // ---------------- request registers ----------------
  logic [WB-1:0]          wid_q;
  logic [NUM_THREADS-1:0] tmask_q;
  logic [4:0]             rd_q;
  logic [31:0]            u_q [NUM_THREADS], v_q [NUM_THREADS], lod_q [NUM_THREADS];

  // ---------------- (1) address generation ----------------
  function automatic logic [31:0] wrap_coord(logic signed [33:0] c, logic [4:0] sz_log, logic rep);
    logic signed [33:0] maxc;
    maxc = (34'sd1 <<< sz_log) - 34'sd1;
    if (rep) return 32'(c & maxc);
    if (c < 0) return 32'd0;
    if (c > maxc) return 32'(maxc);
    return 32'(c);
  endfunction

  logic [31:0] slot_addr [NS];     // byte address of each slot
  logic [7:0]  blend_u [NUM_THREADS], blend_v [NUM_THREADS];

  always_comb begin
    for (int t = 0; t < NUM_THREADS; t++) begin
      logic [2:0]  lod;
      logic [4:0]  wl, hl;
      logic signed [33:0] fx, fy, x0, y0;
      logic [31:0] base, xs [2], ys [2];
      lod  = (lod_q[t] > 32'(TEX_LOD_LEVELS - 1)) ? 3'(TEX_LOD_LEVELS - 1) : lod_q[t][2:0];
      wl   = (st_wlog > 5'(lod)) ? st_wlog - 5'(lod) : 5'd0;
      hl   = (st_hlog > 5'(lod)) ? st_hlog - 5'(lod) : 5'd0;
      base = st_addr + tex_state[TEX_CSR_MIPOFF + int'(lod)];
      // texel-space coordinate, TEX_FRAC fraction bits
      fx = $signed({2'b0, u_q[t]}) <<< wl;
      fy = $signed({2'b0, v_q[t]}) <<< hl;
      if (st_filter) begin
        fx = fx - (34'sd1 <<< (TEX_FRAC - 1));
        fy = fy - (34'sd1 <<< (TEX_FRAC - 1));
      end
      x0 = fx >>> TEX_FRAC;
      y0 = fy >>> TEX_FRAC;
      blend_u[t] = st_filter ? 8'(fx >>> (TEX_FRAC - 8)) : 8'd0;
      blend_v[t] = st_filter ? 8'(fy >>> (TEX_FRAC - 8)) : 8'd0;
      xs[0] = wrap_coord(x0, wl, st_wrap);
      xs[1] = wrap_coord(x0 + 34'sd1, wl, st_wrap);
      ys[0] = wrap_coord(y0, hl, st_wrap);
      ys[1] = wrap_coord(y0 + 34'sd1, hl, st_wrap);
      for (int q = 0; q < 4; q++)
        slot_addr[4*t + q] = base + ((((ys[q/2] << wl) + xs[q%2])) << bpp_log);
    end
  end

  // ---------------- (2) de-duplication ----------------
  logic [31:0]    saddr_q [NS];
  logic [7:0]     bu_q [NUM_THREADS], bv_q [NUM_THREADS];
  logic [SLB-1:0] src_q [NS];       // first slot with the same word
  logic [NS-1:0]  pend_q;           // unique slots still to be requested
  logic [NS-1:0]  need_q;           // unique slots still to be returned
  logic [31:0]    word_q [NS];

  logic [SLB-1:0] src_n [NS];
  logic [NS-1:0]  uniq_n;
  always_comb begin
    for (int i = 0; i < NS; i++) begin
      src_n[i]  = SLB'(i);
      uniq_n[i] = tmask_q[i / 4];
      for (int j = NS - 1; j >= 0; j--)
        if (j < i && tmask_q[j / 4] && slot_addr[j][31:2] == slot_addr[i][31:2]) begin
          src_n[i]  = SLB'(j);
          uniq_n[i] = 1'b0;
        end
    end
  end

  // ---------------- (3) texel memory scheduler ----------------
  logic [NUM_THREADS-1:0] lane_busy_q;
  logic [SLB-1:0]         lane_slot_q [NUM_THREADS];
  logic [SLB-1:0]         lane_pick   [NUM_THREADS];
  logic [NUM_THREADS-1:0] lane_has;

  always_comb begin
    for (int l = 0; l < NUM_THREADS; l++) begin
      lane_has[l]  = 1'b0;
      lane_pick[l] = SLB'(l);
      for (int k = NS / NUM_THREADS - 1; k >= 0; k--)
        if (pend_q[k * NUM_THREADS + l]) begin
          lane_has[l]  = 1'b1;
          lane_pick[l] = SLB'(k * NUM_THREADS + l);
        end
      dc_req_addr[l]  = {saddr_q[lane_pick[l]][31:2], 2'b00};
      dc_req_valid[l] = (state_q == S_FETCH) && lane_has[l] && !lane_busy_q[l];
    end
  end

  // ---------------- (4) duplication + (5) sampler ----------------
  logic [31:0] texels [NUM_THREADS][4];
  always_comb begin
    for (int t = 0; t < NUM_THREADS; t++)
      for (int q = 0; q < 4; q++) begin
        logic [31:0] w;
        w = word_q[src_q[4*t + q]];
        texels[t][q] = w >> (8 * saddr_q[4*t + q][1:0]);
      end
  end

  logic        smp_valid;
  logic [31:0] smp_color [NUM_THREADS];
  vx_tex_sampler #(.NUM_THREADS(NUM_THREADS)) u_sampler (
    .clk, .reset,
    .in_valid  (state_q == S_SAMPLE),
    .in_format (st_fmt),
    .in_texels (texels),
    .in_bu     (bu_q),
    .in_bv     (bv_q),
    .out_valid (smp_valid),
    .out_color (smp_color)
  );

  assign req_ready = (state_q == S_IDLE);
  assign rsp_valid = (state_q == S_DONE);
  assign rsp_wid   = wid_q;
  assign rsp_tmask = tmask_q;
  assign rsp_rd    = rd_q;

  always_ff @(posedge clk) begin
    if (reset) begin
      state_q     <= S_IDLE;
      pend_q      <= '0;
      need_q      <= '0;
      lane_busy_q <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (req_valid) begin
          wid_q   <= req_wid;
          tmask_q <= req_tmask;
          rd_q    <= req_rd;
          u_q     <= req_u;
          v_q     <= req_v;
          lod_q   <= req_lod;
          state_q <= S_ADDR;
        end
        S_ADDR: begin
          saddr_q <= slot_addr;
          src_q   <= src_n;
          bu_q    <= blend_u;
          bv_q    <= blend_v;
          pend_q  <= uniq_n;
          need_q  <= uniq_n;
          state_q <= (uniq_n == '0) ? S_SAMPLE : S_FETCH;
        end
        S_FETCH: begin
          for (int l = 0; l < NUM_THREADS; l++) begin
            if (dc_req_valid[l] && dc_req_ready[l]) begin
              lane_busy_q[l] <= 1'b1;
              lane_slot_q[l] <= lane_pick[l];
              pend_q[lane_pick[l]] <= 1'b0;
            end
            if (dc_rsp_valid && dc_rsp_mask[l] && lane_busy_q[l]) begin
              lane_busy_q[l] <= 1'b0;
              word_q[lane_slot_q[l]] <= dc_rsp_data[l];
              need_q[lane_slot_q[l]] <= 1'b0;
            end
          end
          if (need_q == '0) state_q <= S_SAMPLE;
        end
        S_SAMPLE: state_q <= S_WAIT;
        S_WAIT: if (smp_valid) begin
          rsp_data <= smp_color;
          state_q  <= S_DONE;
        end
        default: if (rsp_ready) state_q <= S_IDLE;
      endcase
    end
  end
endmodule
