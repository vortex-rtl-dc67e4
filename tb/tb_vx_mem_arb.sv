// tb_vx_mem_arb: self-checking testbench of the memory arbiter.
// Four inputs issue random requests; every forwarded request must carry the
// granted input's address and the input index in the low tag bits, no input
// may wait more than four grants (round-robin), and responses with a tag are
// routed back to the input it names with the index removed. Watchdog included.
module tb_vx_mem_arb;
  logic clk = 1'b0, reset = 1'b1;
  always #5 clk = ~clk;
  int unsigned checks = 0, failures = 0;
  task automatic chk(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask
  localparam int N = 4;
  logic [N-1:0] in_req_valid, in_req_ready, in_req_rw, in_rsp_valid, in_rsp_ready;
  logic [25:0]  in_req_addr [N];
  logic [511:0] in_req_data [N];
  logic [63:0]  in_req_byteen [N];
  logic [25:0]  in_req_tag [N];
  logic [511:0] in_rsp_data, out_req_data, out_rsp_data;
  logic [25:0]  in_rsp_tag, out_req_addr;
  logic out_req_valid, out_req_ready, out_req_rw, out_rsp_valid, out_rsp_ready;
  logic [63:0] out_req_byteen;
  logic [27:0] out_req_tag, out_rsp_tag;
  vx_mem_arb #(.NUM_INPUTS(N), .ADDR_WIDTH(26), .DATA_WIDTH(512), .TAG_WIDTH(26)) dut (.*);
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  int wait_n [N];
  initial begin
    in_req_valid = 0; in_req_rw = 0; in_rsp_ready = '1; out_req_ready = 0; out_rsp_valid = 0;
    out_rsp_data = 0; out_rsp_tag = 0;
    for (int i = 0; i < N; i++) begin in_req_addr[i] = 26'(i * 1000); in_req_data[i] = 0; in_req_byteen[i] = 0; in_req_tag[i] = 26'(i + 7); wait_n[i] = 0; end
    repeat (3) @(posedge clk); #1 reset = 1'b0;
    for (int r = 0; r < 400; r++) begin
      in_req_valid = 4'($urandom) | 4'b0001;
      out_req_ready = ($urandom % 4) != 0;
      out_rsp_valid = 1'b1;
      out_rsp_tag = {26'($urandom), 2'($urandom)};
      #1;
      chk("one grant", $countones(in_req_ready), out_req_ready ? 1 : 0);
      if (out_req_valid && out_req_ready) begin
        int g; g = out_req_tag[1:0];
        chk("grant ready", in_req_ready[g], 1);
        chk("addr", out_req_addr, in_req_addr[g]);
        chk("tag", out_req_tag[27:2], in_req_tag[g]);
        for (int i = 0; i < N; i++) if (in_req_valid[i] && i != g) wait_n[i]++;
        wait_n[g] = 0;
        for (int i = 0; i < N; i++) if (wait_n[i] > N) begin failures++; $display("FAIL starvation of %0d", i); wait_n[i] = 0; end
      end
      chk("rsp route", in_rsp_valid, 4'b1 << out_rsp_tag[1:0]);
      chk("rsp tag", in_rsp_tag, out_rsp_tag[27:2]);
      @(posedge clk); #1;
      for (int i = 0; i < N; i++) if (!in_req_valid[i]) wait_n[i] = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
