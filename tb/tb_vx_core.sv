// tb_vx_core: self-checking testbench of one vx_core (default parameters) with its
// global-barrier port served by a vx_barrier table in the testbench.
//
// A behavioural line-wide memory (associative array of 64-byte lines,
// responses returned in order after a few cycles, tag echoed) is preloaded
// with a program, assembled below by small encoder functions, and with a 4x4
// RGBA8 texture. Every core runs the program: it spawns all wavefronts,
// enables all threads, diverges on thread id < 2 (split/join), stores the
// result, samples the texture (point filter, texel x = thread, y = wavefront),
// passes two local barriers around a shared-memory exchange between
// wavefronts, meets all other cores at a global barrier, and stops itself
// with tmc 0. When busy falls the stored words are compared with the
// expected values, and each mechanism (fetch stall, scoreboard stall,
// divergence, wspawn, local and global barrier, cache miss, shared memory,
// texture, memory write) is counted; one that never happened counts
// as a failure. Timing: clk period 10, reset for 10 cycles; watchdog ends
// the run.
module tb_vx_core;
  localparam int unsigned NC = 1;
  logic clk = 1'b0, reset = 1'b1;
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0, writes = 0;
  int unsigned n_fstall = 0, n_sbstall = 0, n_div = 0, n_wspawn = 0, n_lbar = 0, n_gbar = 0,
               n_miss = 0, n_smem = 0, n_tex = 0;

  logic         mem_req_valid, mem_req_ready, mem_req_rw, mem_rsp_valid, mem_rsp_ready, busy;
  logic [25:0]  mem_req_addr;
  logic [511:0] mem_req_data, mem_rsp_data;
  logic [63:0]  mem_req_byteen;
  logic [27-1:0] mem_req_tag, mem_rsp_tag;

  logic       gbar_req_valid, gbar_req_ready, gb_rel_valid;
  logic [1:0] gbar_req_id, gbar_req_wid;
  logic [2:0] gbar_req_count;
  logic [3:0] gb_rel_mask;
  vx_core dut (.*, .gbar_rel_valid (gb_rel_valid), .gbar_rel_mask (gb_rel_mask));
  assign gbar_req_ready = 1'b1;
  vx_barrier #(.NUM_BARRIERS(4), .NUM_WAITERS(4)) u_gbar (
    .clk, .reset, .req_valid (gbar_req_valid), .req_id (gbar_req_id), .req_count (gbar_req_count),
    .req_waiter (gbar_req_wid), .rel_valid (gb_rel_valid), .rel_mask (gb_rel_mask));

  // ---------------- memory model ----------------
  logic [511:0] mem [logic [25:0]];
  localparam int unsigned QD = 16, LAT = 4;
  logic [511:0]    q_data [QD];
  logic [27-1:0] q_tag  [QD];
  int unsigned     q_time [QD];
  int unsigned     q_cnt = 0, cyc = 0;

  function automatic logic [511:0] rd_line(logic [25:0] a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  assign mem_req_ready = (q_cnt < QD - 1);
  assign mem_rsp_valid = (q_cnt != 0) && (cyc >= q_time[0]);
  assign mem_rsp_data  = q_data[0];
  assign mem_rsp_tag   = q_tag[0];

  initial for (int i = 0; i < QD; i++) begin q_data[i] = '0; q_tag[i] = '0; q_time[i] = 0; end

  always @(posedge clk) begin
    int unsigned n;
    logic [511:0]    ld [QD];
    logic [27-1:0] lt [QD];
    int unsigned     lm [QD];
    ld = q_data; lt = q_tag; lm = q_time;
    cyc <= cyc + 1;
    n = q_cnt;
    if (mem_rsp_valid && mem_rsp_ready) begin
      for (int i = 0; i < QD - 1; i++) begin
        ld[i] = ld[i+1]; lt[i] = lt[i+1]; lm[i] = lm[i+1];
      end
      n--;
    end
    if (mem_req_valid && mem_req_ready) begin
      if (mem_req_rw) begin
        logic [511:0] l;
        l = rd_line(mem_req_addr);
        for (int b = 0; b < 64; b++) if (mem_req_byteen[b]) l[8*b +: 8] = mem_req_data[8*b +: 8];
        mem[mem_req_addr] = l;
        writes++;
      end else begin
        ld[n] = rd_line(mem_req_addr);
        lt[n] = mem_req_tag;
        lm[n] = cyc + LAT + ($urandom % 4);
        n++;
      end
    end
    q_data <= ld; q_tag <= lt; q_time <= lm;
    q_cnt <= n;
  end

  function automatic void wr_word(logic [31:0] a, logic [31:0] d);
    logic [511:0] l;
    l = rd_line(a[31:6]);
    l[32*a[5:2] +: 32] = d;
    mem[a[31:6]] = l;
  endfunction
  function automatic logic [31:0] rd_word(logic [31:0] a);
    logic [511:0] l;
    l = rd_line(a[31:6]);
    return l[32*a[5:2] +: 32];
  endfunction

  // ---------------- assembler ----------------
  function automatic logic [31:0] r_t(logic [6:0] f7, logic [4:0] rs2, logic [4:0] rs1, logic [2:0] f3, logic [4:0] rd, logic [6:0] op);
    return {f7, rs2, rs1, f3, rd, op};
  endfunction
  function automatic logic [31:0] i_t(int imm, logic [4:0] rs1, logic [2:0] f3, logic [4:0] rd, logic [6:0] op);
    logic [11:0] i; i = 12'(imm);
    return {i, rs1, f3, rd, op};
  endfunction
  function automatic logic [31:0] s_t(int imm, logic [4:0] rs2, logic [4:0] rs1, logic [2:0] f3);
    logic [11:0] i; i = 12'(imm);
    return {i[11:5], rs2, rs1, f3, i[4:0], 7'h23};
  endfunction
  function automatic logic [31:0] b_t(int imm, logic [4:0] rs2, logic [4:0] rs1, logic [2:0] f3);
    logic [12:0] i; i = 13'(imm);
    return {i[12], i[10:5], rs2, rs1, f3, i[4:1], i[11], 7'h63};
  endfunction
  function automatic logic [31:0] j_t(int imm, logic [4:0] rd);
    logic [20:0] i; i = 21'(imm);
    return {i[20], i[10:1], i[11], i[19:12], rd, 7'h6F};
  endfunction
  function automatic logic [31:0] addi(logic [4:0] rd, logic [4:0] rs1, int imm); return i_t(imm, rs1, 3'd0, rd, 7'h13); endfunction
  function automatic logic [31:0] slli(logic [4:0] rd, logic [4:0] rs1, int sh);  return i_t(sh, rs1, 3'd1, rd, 7'h13); endfunction
  function automatic logic [31:0] add (logic [4:0] rd, logic [4:0] rs1, logic [4:0] rs2); return r_t(7'd0, rs2, rs1, 3'd0, rd, 7'h33); endfunction
  function automatic logic [31:0] sub (logic [4:0] rd, logic [4:0] rs1, logic [4:0] rs2); return r_t(7'h20, rs2, rs1, 3'd0, rd, 7'h33); endfunction
  function automatic logic [31:0] lui (logic [4:0] rd, int imm20);    return {20'(imm20), rd, 7'h37}; endfunction
  function automatic logic [31:0] csrr(logic [4:0] rd, int csr);      return i_t(csr, 5'd0, 3'd2, rd, 7'h73); endfunction
  function automatic logic [31:0] csrw(int csr, logic [4:0] rs1);     return i_t(csr, rs1, 3'd1, 5'd0, 7'h73); endfunction
  function automatic logic [31:0] gpu (logic [2:0] f3, logic [4:0] rs1, logic [4:0] rs2); return r_t(7'd0, rs2, rs1, f3, 5'd0, 7'h0B); endfunction
  function automatic logic [31:0] tex (logic [4:0] rd, logic [4:0] rs1, logic [4:0] rs2, logic [4:0] rs3); return {rs3, 2'b00, rs2, rs1, 3'd5, rd, 7'h0B}; endfunction

  localparam logic [4:0] T0=5, T1=6, T2=7, S0=8, S1=9, A0=10, A1=11, A5=15, S2=18, S3=19, T3=28, T4=29, T5=30, T6=31;
  logic [31:0] prog [55];
  initial begin
    prog[0]  = csrr(A5, 'hCC2);                 // core id (wavefront 0, thread 0 only)
    prog[1]  = addi(T0, 0, 4);
    prog[2]  = {20'd0, A1, 7'h17};              // auipc a1, 0
    prog[3]  = addi(A1, A1, 12);                // a1 = address of prog[5]
    prog[4]  = gpu(3'd1, T0, A1);               // wspawn 4, a1
    prog[5]  = addi(T1, 0, 4);
    prog[6]  = gpu(3'd0, T1, 0);                // tmc 4
    prog[7]  = csrr(S0, 'hCC0);                 // thread id
    prog[8]  = csrr(S1, 'hCC1);                 // wavefront id
    prog[9]  = i_t(2, S0, 3'd2, T2, 7'h13);     // slti t2, s0, 2
    prog[10] = gpu(3'd2, T2, 0);                // split t2
    prog[11] = b_t(12, 0, T2, 3'd0);            // beq t2, x0, else
    prog[12] = addi(S2, 0, 11);
    prog[13] = j_t(8, 0);                       // j end
    prog[14] = addi(S2, 0, 22);                 // else
    prog[15] = gpu(3'd3, 0, 0);                 // end: join
    prog[16] = csrr(A5, 'hCC2);                 // core id, now in every thread
    prog[17] = lui(T6, 'h10000);
    prog[18] = slli(T3, A5, 8);
    prog[19] = add(T6, T6, T3);
    prog[20] = slli(T3, S1, 4);
    prog[21] = add(T6, T6, T3);
    prog[22] = slli(T3, S0, 2);
    prog[23] = add(T6, T6, T3);
    prog[24] = s_t(0, S2, T6, 3'd2);            // sw s2, 0(t6)
    prog[25] = lui(T3, 'h20000);
    prog[26] = csrw('h7C0, T3);                 // texture base
    prog[27] = addi(T3, 0, 2);
    prog[28] = csrw('h7C4, T3);                 // log2 width
    prog[29] = csrw('h7C5, T3);                 // log2 height
    prog[30] = slli(T4, S0, 18);                // u = tid / 4
    prog[31] = slli(T5, S1, 18);                // v = wid / 4
    prog[32] = tex(S3, T4, T5, 0);
    prog[33] = s_t(64, S3, T6, 3'd2);
    prog[34] = addi(A0, 0, 0);
    prog[35] = addi(A1, 0, 4);
    prog[36] = gpu(3'd4, A0, A1);               // bar 0, 4
    prog[37] = lui(T3, 'hFF000);
    prog[38] = slli(T4, S1, 4);
    prog[39] = add(T4, T4, T3);
    prog[40] = slli(T5, S0, 2);
    prog[41] = add(T4, T4, T5);                 // own shared-memory slot
    prog[42] = sub(T5, T4, T3);
    prog[43] = addi(T5, T5, 100);
    prog[44] = s_t(0, T5, T4, 3'd2);
    prog[45] = addi(A0, 0, 1);
    prog[46] = gpu(3'd4, A0, A1);               // bar 1, 4
    prog[47] = i_t(16, T4, 3'd4, T4, 7'h13);    // xori t4, t4, 16: neighbour's slot
    prog[48] = i_t(0, T4, 3'd2, T5, 7'h03);     // lw t5, 0(t4)
    prog[49] = s_t(128, T5, T6, 3'd2);
    prog[50] = csrr(T3, 'hFC2);                 // number of cores
    prog[51] = slli(A1, T3, 2);
    prog[52] = addi(A0, 0, 4);
    prog[53] = gpu(3'd4, A0, A1);               // global bar 0, cores*4
    prog[54] = gpu(3'd0, 0, 0);                 // tmc 0
    for (int i = 0; i < 55; i++) wr_word(32'h8000_0000 + 4 * i, prog[i]);
    for (int y = 0; y < 4; y++)
      for (int x = 0; x < 4; x++) wr_word(32'h2000_0000 + 4 * (4 * y + x), 32'hC0DE_0000 | (y << 4) | x);
  end

  // ---------------- mechanism counters (core 0) ----------------
  always @(posedge clk) if (!reset) begin
    if (dut.if_valid && !dut.if_ready) n_fstall++;
    if (dut.is_valid && dut.sb_busy) n_sbstall++;
    if (dut.spl_v && dut.spl_div) n_div++;
    if (dut.wsp_v) n_wspawn++;
    if (dut.lbar_rel_valid) n_lbar++;
    if (gb_rel_valid) n_gbar++;
    if (dut.icm_req_valid || dut.dcm_req_valid) n_miss++;
    if (dut.sm_rsp_valid) n_smem++;
    if (dut.tex_rsp_valid) n_tex++;
  end

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask
  task automatic mech(string what, int unsigned n);
    checks++;
    $display("mechanism %-16s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism %s never happened", what); end
  endtask

  initial begin : watchdog
    repeat (200_000) @(posedge clk);
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (10) @(posedge clk);
    reset = 1'b0;
    repeat (20) @(posedge clk);
    wait (!busy);
    repeat (20) @(posedge clk);
    for (int c = 0; c < NC; c++)
      for (int w = 0; w < 4; w++)
        for (int t = 0; t < 4; t++) begin
          logic [31:0] a;
          a = 32'h1000_0000 + 256 * c + 16 * w + 4 * t;
          chk($sformatf("branch c%0d w%0d t%0d", c, w, t), rd_word(a), (t < 2) ? 32'd11 : 32'd22);
          chk($sformatf("texel c%0d w%0d t%0d", c, w, t), rd_word(a + 64), 32'hC0DE_0000 | (w << 4) | t);
          chk($sformatf("smem c%0d w%0d t%0d", c, w, t), rd_word(a + 128), 32'(16 * (w ^ 1) + 4 * t + 100));
        end
    mech("fetch_stall", n_fstall);
    mech("scoreboard_stall", n_sbstall);
    mech("divergence", n_div);
    mech("wspawn", n_wspawn);
    mech("local_barrier", n_lbar);
    mech("global_barrier", n_gbar);
    mech("cache_miss", n_miss);
    mech("shared_memory", n_smem);
    mech("texture", n_tex);
    mech("memory_write", writes);
    $display("cycles %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
