// tb_vx_scoreboard: self-checking testbench of the register scoreboard.
// Random set and clear operations on random wavefronts and registers are
// mirrored in a model; every cycle a random instruction check must report
// busy exactly when one of its used sources or its destination is pending
// in its wavefront. Register x0 is never pending. Watchdog included.
module tb_vx_scoreboard;
  logic clk = 1'b0, reset = 1'b1;
  always #5 clk = ~clk;
  int unsigned checks = 0, failures = 0;
  task automatic chk(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask
  logic [1:0] chk_wid, set_wid, clr_wid;
  logic [4:0] chk_rs1, chk_rs2, chk_rs3, chk_rd, set_rd, clr_rd;
  logic chk_use_rs1, chk_use_rs2, chk_use_rs3, chk_wb, busy, set_valid, clr_valid;
  vx_scoreboard #(.NUM_WARPS(4)) dut (.*);
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  logic [31:0] pend [4];
  initial begin
    set_valid = 0; clr_valid = 0; set_wid = 0; clr_wid = 0; set_rd = 0; clr_rd = 0;
    for (int w = 0; w < 4; w++) pend[w] = 0;
    repeat (3) @(posedge clk); #1 reset = 1'b0;
    for (int r = 0; r < 1000; r++) begin
      logic e;
      chk_wid = 2'($urandom); chk_rs1 = 5'($urandom % 8); chk_rs2 = 5'($urandom % 8); chk_rs3 = 5'($urandom % 8);
      chk_rd = 5'($urandom % 8); {chk_use_rs1, chk_use_rs2, chk_use_rs3, chk_wb} = 4'($urandom);
      #1;
      e = (chk_use_rs1 && pend[chk_wid][chk_rs1]) || (chk_use_rs2 && pend[chk_wid][chk_rs2]) ||
          (chk_use_rs3 && pend[chk_wid][chk_rs3]) || (chk_wb && pend[chk_wid][chk_rd]);
      chk("busy", busy, e);
      set_valid = $urandom % 2; set_wid = 2'($urandom); set_rd = 5'($urandom % 8);
      clr_valid = $urandom % 2; clr_wid = 2'($urandom); clr_rd = 5'($urandom % 8);
      if (set_valid && clr_valid && set_wid == clr_wid && set_rd == clr_rd) clr_valid = 0;
      @(posedge clk); #1;
      if (set_valid && set_rd != 0) pend[set_wid][set_rd] = 1'b1;
      if (clr_valid) pend[clr_wid][clr_rd] = 1'b0;
      set_valid = 0; clr_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
