// tb_vx_writeback: self-checking testbench of the commit arbiter.
// Random sets of valid results from four units: exactly the lowest valid
// input must be granted and its wavefront, register, mask, data and write
// flag must appear on the register-file port. Purely combinational.
module tb_vx_writeback;
  logic clk = 1'b0, reset = 1'b1;
  always #5 clk = ~clk;
  int unsigned checks = 0, failures = 0;
  task automatic chk(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask
  logic [3:0] in_valid, in_ready, in_wb;
  logic [1:0] in_wid [4];
  logic [4:0] in_rd [4];
  logic [3:0] in_tmask [4];
  logic [31:0] in_data [4][4];
  logic wb_valid, wb_write;
  logic [1:0] wb_wid; logic [4:0] wb_rd; logic [3:0] wb_tmask;
  logic [31:0] wb_data [4];
  vx_writeback #(.NUM_INPUTS(4), .NUM_THREADS(4), .WB(2)) dut (.*);
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    for (int r = 0; r < 400; r++) begin
      int g;
      in_valid = 4'($urandom); in_wb = 4'($urandom);
      for (int i = 0; i < 4; i++) begin
        in_wid[i] = 2'($urandom); in_rd[i] = 5'($urandom); in_tmask[i] = 4'($urandom);
        for (int t = 0; t < 4; t++) in_data[i][t] = $urandom;
      end
      #1;
      g = -1; for (int i = 3; i >= 0; i--) if (in_valid[i]) g = i;
      chk("valid", wb_valid, g >= 0);
      if (g >= 0) begin
        chk("ready", in_ready, 4'b1 << g);
        chk("write", wb_write, in_wb[g]);
        chk("wid", wb_wid, in_wid[g]);
        chk("rd", wb_rd, in_rd[g]);
        chk("tmask", wb_tmask, in_tmask[g]);
        for (int t = 0; t < 4; t++) chk("data", wb_data[t], in_data[g][t]);
      end else chk("no ready", in_ready, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
