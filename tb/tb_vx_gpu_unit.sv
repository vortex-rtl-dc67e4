// tb_vx_gpu_unit: self-checking testbench of the GPU-instruction unit.
// For random thread masks and operands, tmc must enable the lowest a0
// threads, wspawn must name wavefronts 1..a0-1 and b0 as pc, split must
// separate the active threads by predicate bit 0 and flag divergence, and
// bar must split the id into scope bit and table index. a0/b0 are the
// operands of the lowest active thread. Purely combinational.
module tb_vx_gpu_unit;
  logic clk = 1'b0, reset = 1'b1;
  always #5 clk = ~clk;
  int unsigned checks = 0, failures = 0;
  task automatic chk(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask
  logic valid, tmc_valid, wspawn_valid, split_valid, split_diverged, join_valid, bar_valid, bar_global;
  logic [2:0] func3;
  logic [31:0] pc, wspawn_pc, split_pc, bar_count;
  logic [3:0] tmask, tmc_tmask, wspawn_mask, split_taken, split_ntaken;
  logic [1:0] bar_id;
  logic [31:0] rs1_data [4], rs2_data [4];
  vx_gpu_unit #(.NUM_WARPS(4), .NUM_THREADS(4), .BAR_ID_BITS(3)) dut (.*);
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    valid = 1; pc = 32'h8000_0040;
    for (int r = 0; r < 400; r++) begin
      int lo; logic [3:0] tk;
      tmask = 4'($urandom) | 4'b1000;
      lo = 0; while (!tmask[lo]) lo++;
      for (int t = 0; t < 4; t++) begin rs1_data[t] = $urandom % 6; rs2_data[t] = $urandom; end
      func3 = 3'($urandom % 5);
      #1;
      chk("tmc valid", tmc_valid, func3 == 0);
      chk("wspawn valid", wspawn_valid, func3 == 1);
      chk("split valid", split_valid, func3 == 2);
      chk("join valid", join_valid, func3 == 3);
      chk("bar valid", bar_valid, func3 == 4);
      for (int t = 0; t < 4; t++) chk("tmc mask", tmc_tmask[t], rs1_data[lo] > t);
      for (int w = 0; w < 4; w++) chk("wspawn mask", wspawn_mask[w], w != 0 && rs1_data[lo] > w);
      chk("wspawn pc", wspawn_pc, rs2_data[lo]);
      for (int t = 0; t < 4; t++) tk[t] = tmask[t] & rs1_data[t][0];
      chk("split taken", split_taken, tk);
      chk("split ntaken", split_ntaken, tmask & ~tk);
      chk("split diverged", split_diverged, tk != 0 && (tmask & ~tk) != 0);
      chk("split pc", split_pc, pc + 4);
      chk("bar global", bar_global, rs1_data[lo][2]);
      chk("bar id", bar_id, rs1_data[lo][1:0]);
      chk("bar count", bar_count, rs2_data[lo]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
