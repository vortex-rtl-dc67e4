// tb_vx_ibuffer: self-checking testbench of the per-wavefront instruction
// buffer. Random pushes to random wavefronts and random pops from each head
// are mirrored in one queue per wavefront; order per wavefront, in_ready
// (full) and out_valid (non-empty) are checked every cycle. Watchdog.
module tb_vx_ibuffer;
  logic clk = 1'b0, reset = 1'b1;
  always #5 clk = ~clk;
  int unsigned checks = 0, failures = 0;
  task automatic chk(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  logic in_valid, in_ready;
  logic [1:0] in_wid;
  logic [63:0] in_data;
  logic [3:0] out_valid, out_ready;
  logic [63:0] out_data [4];
  vx_ibuffer #(.NUM_WARPS(4), .DATAW(64), .DEPTH(2)) dut (.*);
  logic [63:0] q [4][$];
  initial begin
    in_valid = 0; in_wid = 0; in_data = 0; out_ready = 0;
    repeat (3) @(posedge clk); #1 reset = 1'b0;
    for (int r = 0; r < 2000; r++) begin
      in_valid = $urandom % 2; in_wid = 2'($urandom); in_data = {$urandom, $urandom};
      out_ready = 4'($urandom);
      #1;
      chk("in_ready", in_ready, q[in_wid].size() < 2);
      for (int w = 0; w < 4; w++) begin
        chk("out_valid", out_valid[w], q[w].size() != 0);
        if (q[w].size() != 0) chk("out_data", out_data[w], q[w][0]);
      end
      @(posedge clk);
      for (int w = 0; w < 4; w++) if (out_valid[w] && out_ready[w]) void'(q[w].pop_front());
      if (in_valid && in_ready) q[in_wid].push_back(in_data);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
