// tb_vx_smem: self-checking testbench of the banked shared memory.
// Random per-lane word stores with byte enables and random loads over a small
// window are mirrored in a reference; lanes not accepted because of a bank
// conflict retry. Read data arrive one cycle after acceptance with their lane
// mask. Bank conflicts are counted and must occur. Watchdog.
module tb_vx_smem;
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
  logic [3:0] req_valid, req_ready, rsp_mask;
  logic req_rw, rsp_valid;
  logic [31:0] req_addr [4], req_data [4], rsp_data [4];
  logic [3:0] req_byteen [4];
  vx_smem #(.SMEM_SIZE(16384), .NUM_BANKS(4), .NUM_THREADS(4)) dut (.*);
  logic [31:0] ref_m [int];
  int unsigned n_conf = 0;
  initial begin
    req_valid = 0; req_rw = 0;
    for (int l = 0; l < 4; l++) begin req_addr[l] = 0; req_data[l] = 0; req_byteen[l] = 0; end
    repeat (3) @(posedge clk); #1 reset = 1'b0;
    // initialise the window
    for (int a = 0; a < 64; a += 4) begin
      req_valid = 4'b0001; req_rw = 1; req_addr[0] = a; req_data[0] = 0; req_byteen[0] = 4'hF;
      ref_m[a] = 0; @(posedge clk); #1;
    end
    for (int r = 0; r < 500; r++) begin
      logic [3:0] pend;
      logic [31:0] exp [4];
      req_rw = $urandom % 2;
      for (int l = 0; l < 4; l++) begin
        req_addr[l] = 4 * ($urandom % 16); req_data[l] = $urandom; req_byteen[l] = req_rw ? 4'($urandom) : 4'h0;
      end
      if (req_rw) for (int l = 1; l < 4; l++) req_addr[l] = 4 * ((req_addr[0] / 4 + l) % 16);
      pend = 4'($urandom) | 4'b0001;
      for (int l = 0; l < 4; l++) exp[l] = ref_m[req_addr[l]];
      req_valid = pend;
      while (req_valid != 0) begin
        logic [3:0] acc;
        #1;
        acc = req_valid & req_ready;
        if (req_valid & ~req_ready) n_conf++;
        @(posedge clk);
        if (req_rw) for (int l = 0; l < 4; l++) if (acc[l])
          for (int b = 0; b < 4; b++) if (req_byteen[l][b]) ref_m[req_addr[l]][8*b +: 8] = req_data[l][8*b +: 8];
        #1;
        if (!req_rw) begin
          chk("rsp valid", rsp_valid, 1);
          chk("rsp mask", rsp_mask, acc);
          for (int l = 0; l < 4; l++) if (acc[l]) chk("rsp data", rsp_data[l], exp[l]);
        end
        req_valid = req_valid & ~acc;
      end
    end
    checks++;
    if (n_conf == 0) begin failures++; $display("FAIL no bank conflict"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
