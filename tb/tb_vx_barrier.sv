// tb_vx_barrier: self-checking testbench of the barrier table.
// Three wavefronts arrive at barrier 1 with count 3 while a fourth arrives at
// barrier 2 with count 2; no release may happen before the last arrival of a
// barrier, and the release one cycle after it must name exactly its waiters.
// Repeated with random waiter orders. Clock period 10, watchdog included.
module tb_vx_barrier;
  logic clk = 1'b0, reset = 1'b1;
  always #5 clk = ~clk;
  int unsigned checks = 0, failures = 0;
  task automatic chk(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask
  logic       req_valid, rel_valid;
  logic [1:0] req_id, req_waiter;
  logic [2:0] req_count;
  logic [3:0] rel_mask;
  vx_barrier #(.NUM_BARRIERS(4), .NUM_WAITERS(4)) dut (.*);
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  task automatic arrive(int id, int cnt, int w);
    req_valid = 1'b1; req_id = 2'(id); req_count = 3'(cnt); req_waiter = 2'(w);
    @(posedge clk); #1;
    req_valid = 1'b0;
  endtask
  initial begin
    req_valid = 0; req_id = 0; req_count = 0; req_waiter = 0;
    repeat (3) @(posedge clk); #1 reset = 1'b0;
    for (int r = 0; r < 20; r++) begin
      int order [3];
      int s;
      order = '{0, 1, 2};
      s = $urandom % 3; begin int t; t = order[0]; order[0] = order[s]; order[s] = t; end
      arrive(1, 3, order[0]); chk("no early release 1", rel_valid, 0);
      arrive(2, 2, 3);        chk("no early release 2", rel_valid, 0);
      arrive(1, 3, order[1]); chk("no early release 3", rel_valid, 0);
      arrive(1, 3, order[2]);
      chk("release valid", rel_valid, 1);
      chk("release mask", rel_mask, 4'b0111);
      @(posedge clk); #1;
      chk("single release", rel_valid, 0);
      arrive(2, 2, 1);
      chk("release 2 valid", rel_valid, 1);
      chk("release 2 mask", rel_mask, 4'b1010);
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
