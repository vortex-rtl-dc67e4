// tb_vx_csr_unit: self-checking testbench of the CSR unit.
// Checks the read-only identity CSRs (thread id per lane, wavefront id, core
// id, thread mask, thread/wavefront/core counts), that the cycle counter
// advances, and that texture-state CSRs follow csrrw/csrrs/csrrc semantics
// with the operand of the lowest active thread and appear on tex_state.
// Reads are combinational, writes take effect at the clock edge. Watchdog.
module tb_vx_csr_unit;
  import vx_pkg::*;
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
  logic req_valid;
  logic [1:0] req_wid;
  logic [3:0] req_tmask;
  logic [2:0] req_func3;
  logic [11:0] req_addr;
  logic [4:0] req_zimm;
  logic [31:0] req_rs1 [4], rsp_data [4];
  logic [31:0] tex_state [TEX_CSR_MIPOFF + TEX_LOD_LEVELS];
  vx_csr_unit #(.NUM_WARPS(4), .NUM_THREADS(4), .NUM_CORES(8), .CORE_ID(5)) dut (.*);
  logic [31:0] model [TEX_CSR_MIPOFF + TEX_LOD_LEVELS];
  initial begin
    logic [31:0] c0;
    req_valid = 0; req_wid = 0; req_tmask = 4'hF; req_func3 = 3'd2; req_addr = 0; req_zimm = 0;
    for (int t = 0; t < 4; t++) req_rs1[t] = 0;
    for (int i = 0; i < TEX_CSR_MIPOFF + TEX_LOD_LEVELS; i++) model[i] = 0;
    repeat (3) @(posedge clk); #1 reset = 1'b0;
    for (int r = 0; r < 50; r++) begin
      req_wid = 2'($urandom); req_tmask = 4'($urandom) | 4'b1000;
      req_addr = CSR_THREAD_ID; #1; for (int t = 0; t < 4; t++) chk("thread id", rsp_data[t], t);
      req_addr = CSR_WARP_ID;   #1; chk("warp id", rsp_data[1], req_wid);
      req_addr = CSR_CORE_ID;   #1; chk("core id", rsp_data[2], 5);
      req_addr = CSR_TMASK;     #1; chk("tmask", rsp_data[3], req_tmask);
      req_addr = CSR_NUM_THREADS; #1; chk("num threads", rsp_data[0], 4);
      req_addr = CSR_NUM_WARPS; #1; chk("num warps", rsp_data[0], 4);
      req_addr = CSR_NUM_CORES; #1; chk("num cores", rsp_data[0], 8);
    end
    req_addr = CSR_CYCLE; #1; c0 = rsp_data[0];
    repeat (7) @(posedge clk); #1; chk("cycle advances", rsp_data[0] - c0, 7);
    for (int r = 0; r < 300; r++) begin
      int idx, lo; logic [31:0] v;
      idx = $urandom % (TEX_CSR_MIPOFF + TEX_LOD_LEVELS);
      req_tmask = 4'($urandom) | 4'b1000;
      lo = 0; while (!req_tmask[lo]) lo++;
      for (int t = 0; t < 4; t++) req_rs1[t] = $urandom;
      req_func3 = 3'(1 + $urandom % 3);
      req_addr = CSR_TEX_BASE + 12'(idx);
      #1 chk("tex read", rsp_data[lo], model[idx]);
      req_valid = 1;
      @(posedge clk); #1 req_valid = 0;
      v = req_rs1[lo];
      case (req_func3) 3'd1: model[idx] = v; 3'd2: model[idx] |= v; default: model[idx] &= ~v; endcase
      chk("tex state", tex_state[idx], model[idx]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
