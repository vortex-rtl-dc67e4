// vx_tex_sampler: texel format conversion and bilinear filter.
//
// For every thread it takes the four texels of a 2x2 quad (t0 t1 on the top
// row, t2 t3 below, raw texel in the low bits), the texture format and two
// 8-bit blend weights. The texels are converted to RGBA8 (R in bits 7:0)
// and blended per channel in two pipeline cycles:
//   cycle 1: top = lerp(t0, t1, bu), bot = lerp(t2, t3, bu)
//   cycle 2: color = lerp(top, bot, bv)
// with lerp(a, b, w) = (a*(256-w) + b*w) >> 8. Point sampling uses weights of
// 0, so the result is t0 exactly. Fixed two-cycle latency, one request per
// cycle, no back-pressure (the caller waits for out_valid). The two-cycle
// bilinear blend and the point-as-bilinear trick follow the design; the
// formats offered and the weight precision are this implementation's choice.
module vx_tex_sampler
  import vx_pkg::*;
#(
  parameter int unsigned NUM_THREADS = 4
) (
  input  logic                   clk,
  input  logic                   reset,
  input  logic                   in_valid,
  input  logic [1:0]             in_format,
  input  logic [31:0]            in_texels [NUM_THREADS][4],
  input  logic [7:0]             in_bu     [NUM_THREADS],
  input  logic [7:0]             in_bv     [NUM_THREADS],
  output logic                   out_valid,
  output logic [31:0]            out_color [NUM_THREADS]
);
  function automatic logic [31:0] to_rgba8(logic [31:0] t, logic [1:0] fmt);
    unique case (fmt)
      TEX_FMT_RGB565: return {8'hFF, t[4:0], t[4:2], t[10:5], t[10:9], t[15:11], t[15:13]};
      TEX_FMT_L8:     return {8'hFF, t[7:0], t[7:0], t[7:0]};
      default:        return t;
    endcase
  endfunction

  function automatic logic [31:0] lerp4(logic [31:0] a, logic [31:0] b, logic [7:0] w);
    logic [31:0] r;
    for (int c = 0; c < 4; c++) begin
      logic [16:0] s;
      s = 17'(a[8*c +: 8]) * (17'd256 - 17'(w)) + 17'(b[8*c +: 8]) * 17'(w);
      r[8*c +: 8] = s[15:8];
    end
    return r;
  endfunction

  logic        v1_q;
  logic [31:0] top_q [NUM_THREADS];
  logic [31:0] bot_q [NUM_THREADS];
  logic [7:0]  bv_q  [NUM_THREADS];

  always_ff @(posedge clk) begin
    if (reset) begin
      v1_q      <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1_q      <= in_valid;
      out_valid <= v1_q;
    end
    for (int t = 0; t < NUM_THREADS; t++) begin
      top_q[t]     <= lerp4(to_rgba8(in_texels[t][0], in_format), to_rgba8(in_texels[t][1], in_format), in_bu[t]);
      bot_q[t]     <= lerp4(to_rgba8(in_texels[t][2], in_format), to_rgba8(in_texels[t][3], in_format), in_bu[t]);
      bv_q[t]      <= in_bv[t];
      out_color[t] <= lerp4(top_q[t], bot_q[t], bv_q[t]);
    end
  end
endmodule
