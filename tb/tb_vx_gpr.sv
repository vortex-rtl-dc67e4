// tb_vx_gpr: self-checking testbench of the register file.
// Random masked writes to random wavefronts and registers are mirrored in a
// model; the three combinational read ports are compared with it after every
// write, and register x0 must always read 0. Watchdog included.
module tb_vx_gpr;
  logic clk = 1'b0, reset = 1'b1;
  always #5 clk = ~clk;
  int unsigned checks = 0, failures = 0;
  task automatic chk(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask
  logic [1:0] rd_wid, wr_wid;
  logic [4:0] rs1, rs2, rs3, wr_rd;
  logic [31:0] rs1_data [4], rs2_data [4], rs3_data [4], wr_data [4];
  logic wr_valid;
  logic [3:0] wr_tmask;
  vx_gpr #(.NUM_WARPS(4), .NUM_THREADS(4)) dut (.*);
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  logic [31:0] m [4][4][32];
  initial begin
    wr_valid = 0; wr_wid = 0; wr_rd = 0; wr_tmask = 0; rd_wid = 0; rs1 = 0; rs2 = 0; rs3 = 0;
    for (int t = 0; t < 4; t++) wr_data[t] = 0;
    for (int w = 0; w < 4; w++) for (int t = 0; t < 4; t++) for (int r = 0; r < 32; r++) m[w][t][r] = 0;
    repeat (3) @(posedge clk); #1 reset = 1'b0;
    for (int r = 0; r < 800; r++) begin
      wr_valid = 1; wr_wid = 2'($urandom); wr_rd = 5'($urandom); wr_tmask = 4'($urandom);
      for (int t = 0; t < 4; t++) wr_data[t] = $urandom;
      @(posedge clk); #1;
      if (wr_rd != 0) for (int t = 0; t < 4; t++) if (wr_tmask[t]) m[wr_wid][t][wr_rd] = wr_data[t];
      wr_valid = 0;
      rd_wid = 2'($urandom); rs1 = 5'($urandom); rs2 = 5'($urandom); rs3 = 5'($urandom % 2);
      #1;
      for (int t = 0; t < 4; t++) begin
        chk("rs1", rs1_data[t], m[rd_wid][t][rs1]);
        chk("rs2", rs2_data[t], m[rd_wid][t][rs2]);
        chk("rs3", rs3_data[t], m[rd_wid][t][rs3]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
