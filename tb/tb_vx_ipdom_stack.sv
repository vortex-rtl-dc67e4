// tb_vx_ipdom_stack: self-checking testbench of the reconvergence stack.
// A divergent split pushes a fall-through entry and a not-taken entry; the
// pops must return them in reverse order with their flags. A uniform split
// pushes only the fall-through entry. Nested random splits are checked
// against a queue model. Clock period 10, watchdog included.
module tb_vx_ipdom_stack;
  logic clk = 1'b0, reset = 1'b1;
  always #5 clk = ~clk;
  int unsigned checks = 0, failures = 0;
  task automatic chk(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask
  logic push, push2, pop, top_fall, empty, full;
  logic [3:0] push_tmask_a, push_tmask_b, top_tmask;
  logic [31:0] push_pc_b, top_pc;
  vx_ipdom_stack #(.NUM_THREADS(4)) dut (.*);
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  typedef struct packed { logic [3:0] m; logic [31:0] pc; logic fall; } ent_t;
  ent_t model [$];
  initial begin
    push = 0; push2 = 0; pop = 0; push_tmask_a = 0; push_tmask_b = 0; push_pc_b = 0;
    repeat (3) @(posedge clk); #1 reset = 1'b0;
    chk("empty after reset", empty, 1);
    for (int r = 0; r < 300; r++) begin
      if (model.size() < 6 && ($urandom % 2)) begin
        push = 1; push2 = $urandom % 2;
        push_tmask_a = 4'($urandom); push_tmask_b = 4'($urandom); push_pc_b = $urandom;
        model.push_back('{push_tmask_a, 32'h0, 1'b1});
        if (push2) model.push_back('{push_tmask_b, push_pc_b, 1'b0});
      end else if (model.size() != 0) begin
        pop = 1;
      end
      @(posedge clk); #1;
      if (pop) void'(model.pop_back());
      push = 0; push2 = 0; pop = 0;
      chk("empty", empty, model.size() == 0);
      if (model.size() != 0) begin
        chk("top mask", top_tmask, model[$].m);
        chk("top fall", top_fall, model[$].fall);
        if (!model[$].fall) chk("top pc", top_pc, model[$].pc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
