// tb_vx_cache: self-checking testbench of the banked non-blocking cache.
// Default size (16 KB, 64-byte lines, 4 banks, 2 virtual ports, 4 lanes).
// Random batches of reads or writes from the four lanes go to a small address
// range (so hits, misses, merged misses and bank conflicts all occur). A
// behavioural line memory answers misses in order after a random delay and
// applies write-through stores. Every read reply is compared with a word
// reference model; write batches finish when every lane is accepted. The
// testbench counts misses (memory reads) and bank conflicts (a valid lane not
// accepted) and fails if either never happened. Clock period 10, watchdog.
module tb_vx_cache;
  logic clk = 1'b0, reset = 1'b1;
  always #5 clk = ~clk;
  int unsigned checks = 0, failures = 0, n_miss = 0, n_conflict = 0, n_hitrd = 0;
  task automatic chk(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask

  logic [3:0]   core_req_valid, core_req_ready, core_rsp_mask;
  logic         core_req_rw, core_rsp_valid, core_rsp_ready, idle;
  logic [31:0]  core_req_addr [4], core_req_data [4], core_rsp_data [4];
  logic [3:0]   core_req_byteen [4];
  logic [7:0]   core_req_tag, core_rsp_tag;
  logic         mem_req_valid, mem_req_ready, mem_req_rw, mem_rsp_valid, mem_rsp_ready;
  logic [25:0]  mem_req_addr, mem_rsp_addr;
  logic [511:0] mem_req_data, mem_rsp_data;
  logic [63:0]  mem_req_byteen;
  vx_cache dut (.*);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // behavioural memory, initial word value = its address
  logic [511:0] mem [logic [25:0]];
  function automatic logic [511:0] rd_line(logic [25:0] a);
    logic [511:0] l;
    if (mem.exists(a)) return mem[a];
    for (int w = 0; w < 16; w++) l[32*w +: 32] = {a, 4'(w), 2'b00};
    return l;
  endfunction
  localparam int QD = 8;
  logic [25:0] q_addr [QD]; logic [511:0] q_data [QD]; int unsigned q_time [QD];
  int unsigned q_cnt = 0, cyc = 0;
  assign mem_req_ready = q_cnt < QD - 1;
  assign mem_rsp_valid = q_cnt != 0 && cyc >= q_time[0];
  assign mem_rsp_addr  = q_addr[0];
  assign mem_rsp_data  = q_data[0];
  initial for (int i = 0; i < QD; i++) begin q_addr[i] = 0; q_data[i] = 0; q_time[i] = 0; end
  always @(posedge clk) begin
    int unsigned n;
    logic [25:0] la [QD]; logic [511:0] ld [QD]; int unsigned lt [QD];
    la = q_addr; ld = q_data; lt = q_time; n = q_cnt;
    cyc <= cyc + 1;
    if (mem_rsp_valid && mem_rsp_ready) begin
      for (int i = 0; i < QD - 1; i++) begin la[i] = la[i+1]; ld[i] = ld[i+1]; lt[i] = lt[i+1]; end
      n--;
    end
    if (!reset && mem_req_valid && mem_req_ready) begin
      if (mem_req_rw) begin
        logic [511:0] l;
        l = rd_line(mem_req_addr);
        for (int b = 0; b < 64; b++) if (mem_req_byteen[b]) l[8*b +: 8] = mem_req_data[8*b +: 8];
        mem[mem_req_addr] = l;
      end else begin
        la[n] = mem_req_addr; ld[n] = rd_line(mem_req_addr); lt[n] = cyc + 3 + ($urandom % 8);
        n++; n_miss++;
      end
    end
    q_addr <= la; q_data <= ld; q_time <= lt; q_cnt <= n;
  end

  // word reference
  logic [31:0] ref_w [logic [29:0]];
  function automatic logic [31:0] ref_rd(logic [31:0] a);
    return ref_w.exists(a[31:2]) ? ref_w[a[31:2]] : {a[31:2], 2'b00};
  endfunction

  initial begin
    core_req_valid = 0; core_req_rw = 0; core_req_tag = 0; core_rsp_ready = 1;
    for (int l = 0; l < 4; l++) begin core_req_addr[l] = 0; core_req_data[l] = 0; core_req_byteen[l] = 0; end
    repeat (5) @(posedge clk); #1 reset = 1'b0;
    for (int r = 0; r < 400; r++) begin
      logic [3:0] pend, got;
      logic [31:0] exp [4];
      core_req_rw  = ($urandom % 4) == 0;
      core_req_tag = 8'(r);
      for (int l = 0; l < 4; l++) begin
        // 4 KB window: lines in all banks, some sets conflict in the 16 KB cache, some reuse
        core_req_addr[l]   = 32'h1000_0000 + (($urandom % 64) * 64) + (($urandom % 16) * 4)
                             + ((($urandom % 8) == 0) ? 32'h4000 : 0);
        core_req_data[l]   = $urandom;
        core_req_byteen[l] = core_req_rw ? 4'hF : 4'h0;
      end
      if (core_req_rw) begin // distinct words so the final value is well defined
        for (int l = 1; l < 4; l++) core_req_addr[l] = core_req_addr[0] + 32'(l * 68);
      end
      pend = 4'($urandom) | 4'b0001;
      for (int l = 0; l < 4; l++) exp[l] = ref_rd(core_req_addr[l]);
      got = 0;
      core_req_valid = pend;
      while (core_req_valid != 0) begin
        @(posedge clk);
        if (core_req_valid & ~core_req_ready) n_conflict++;
        if (core_rsp_valid) begin
          for (int l = 0; l < 4; l++) if (core_rsp_mask[l]) begin
            chk($sformatf("read lane %0d addr %h", l, core_req_addr[l]), core_rsp_data[l], exp[l]);
            got[l] = 1'b1;
          end
          chk("rsp tag", core_rsp_tag, core_req_tag);
        end
        #1 core_req_valid = core_req_valid & ~core_req_ready_q;
      end
      if (core_req_rw) begin
        for (int l = 0; l < 4; l++) if (pend[l]) ref_w[core_req_addr[l][31:2]] = core_req_data[l];
      end else begin
        int unsigned to;
        to = 0;
        while (got != pend && to < 1000) begin
          @(posedge clk);
          if (core_rsp_valid) begin
            for (int l = 0; l < 4; l++) if (core_rsp_mask[l]) begin
              chk($sformatf("read lane %0d addr %h", l, core_req_addr[l]), core_rsp_data[l], exp[l]);
              got[l] = 1'b1;
            end
            chk("rsp tag", core_rsp_tag, core_req_tag);
          end
          to++;
          #1;
        end
        chk("all lanes answered", got, pend);
      end
    end
    repeat (50) @(posedge clk);
    chk("idle at end", idle, 1);
    checks += 2;
    $display("misses %0d, bank conflicts %0d", n_miss, n_conflict);
    if (n_miss == 0) begin failures++; $display("FAIL no miss"); end
    if (n_conflict == 0) begin failures++; $display("FAIL no bank conflict"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // ready sampled at the clock edge, used after it
  logic [3:0] core_req_ready_q;
  always @(posedge clk) core_req_ready_q <= core_req_ready;
endmodule
