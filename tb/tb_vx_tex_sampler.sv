// tb_vx_tex_sampler: self-checking testbench of the texel sampler.
// Random quads and weights in the three formats are sent one per cycle and
// the colour two cycles later is compared with a reference of the format
// conversion and the lerp(lerp(t0,t1,bu), lerp(t2,t3,bu), bv) blend. Zero
// weights (point sampling) must return texel 0 unchanged. Watchdog included.
module tb_vx_tex_sampler;
  import vx_pkg::*;
  logic clk = 1'b0, reset = 1'b1;
  always #5 clk = ~clk;
  int unsigned checks = 0, failures = 0;
  task automatic chk(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask
  logic in_valid, out_valid;
  logic [1:0] in_format;
  logic [31:0] in_texels [4][4];
  logic [7:0]  in_bu [4], in_bv [4];
  logic [31:0] out_color [4];
  vx_tex_sampler #(.NUM_THREADS(4)) dut (.*);
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  function automatic logic [31:0] conv(logic [31:0] t, logic [1:0] f);
    case (f)
      2'd1: return {8'hFF, {t[4:0], t[4:2]}, {t[10:5], t[10:9]}, {t[15:11], t[15:13]}};
      2'd2: return {8'hFF, t[7:0], t[7:0], t[7:0]};
      default: return t;
    endcase
  endfunction
  function automatic logic [31:0] lerp(logic [31:0] a, logic [31:0] b, logic [7:0] w);
    logic [31:0] r;
    for (int c = 0; c < 4; c++) r[8*c +: 8] = 8'((int'(a[8*c +: 8]) * (256 - int'(w)) + int'(b[8*c +: 8]) * int'(w)) >> 8);
    return r;
  endfunction
  logic [127:0] exp_q [$];
  always @(posedge clk) if (!reset && out_valid) begin
    logic [127:0] e;
    e = exp_q.pop_front();
    for (int t = 0; t < 4; t++) chk($sformatf("colour t%0d", t), out_color[t], e[32*t +: 32]);
  end
  initial begin
    in_valid = 0; in_format = 0;
    for (int t = 0; t < 4; t++) begin in_bu[t] = 0; in_bv[t] = 0; for (int q = 0; q < 4; q++) in_texels[t][q] = 0; end
    repeat (3) @(posedge clk); #1 reset = 1'b0;
    for (int r = 0; r < 300; r++) begin
      logic [31:0] e [4];
      in_valid = 1; in_format = 2'($urandom % 3);
      for (int t = 0; t < 4; t++) begin
        for (int q = 0; q < 4; q++) in_texels[t][q] = $urandom;
        in_bu[t] = (r % 4 == 0) ? 8'd0 : 8'($urandom);
        in_bv[t] = (r % 4 == 0) ? 8'd0 : 8'($urandom);
        e[t] = lerp(lerp(conv(in_texels[t][0], in_format), conv(in_texels[t][1], in_format), in_bu[t]),
                    lerp(conv(in_texels[t][2], in_format), conv(in_texels[t][3], in_format), in_bu[t]), in_bv[t]);
        if (r % 4 == 0) chk("point = texel 0", e[t], conv(in_texels[t][0], in_format));
      end
      exp_q.push_back({e[3], e[2], e[1], e[0]});
      @(posedge clk); #1;
    end
    in_valid = 0;
    repeat (5) @(posedge clk);
    chk("all colours returned", exp_q.size(), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
