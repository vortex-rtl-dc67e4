// vx_csr_unit: control and status registers of the core.
//
// Executes csrrw/csrrs/csrrc and their immediate forms for a whole
// wavefront in one cycle (combinational result, registered state). Read-only
// CSRs give each thread its own thread id, and the wavefront id, core id,
// thread mask and machine size; a cycle counter is kept. The texture state
// CSRs (base address, format, wrap, filter, log2 width/height and one mip
// offset per level) are held here and written from the lowest active
// thread's operand; the texture unit reads them directly. The CSR addresses
// are this implementation's choice (see vx_pkg).
module vx_csr_unit
  import vx_pkg::*;
#(
  parameter int unsigned NUM_WARPS   = 4,
  parameter int unsigned NUM_THREADS = 4,
  parameter int unsigned NUM_CORES   = 1,
  parameter int unsigned CORE_ID     = 0,
  localparam int unsigned WB = (NUM_WARPS > 1) ? $clog2(NUM_WARPS) : 1
) (
  input  logic                   clk,
  input  logic                   reset,
  input  logic                   req_valid,
  input  logic [WB-1:0]          req_wid,
  input  logic [NUM_THREADS-1:0] req_tmask,
  input  logic [2:0]             req_func3,
  input  logic [11:0]            req_addr,
  input  logic [4:0]             req_zimm,
  input  logic [31:0]            req_rs1 [NUM_THREADS],
  output logic [31:0]            rsp_data [NUM_THREADS],
  // texture state
  output logic [31:0]            tex_state [TEX_CSR_MIPOFF + TEX_LOD_LEVELS]
);
  localparam int unsigned NTEX = TEX_CSR_MIPOFF + TEX_LOD_LEVELS;
  logic [31:0] cycle_q;
  logic [31:0] tex_q [NTEX];
  logic [31:0] src0, old0, new0;
  logic        is_tex;
  logic [11:0] tex_idx;

  assign is_tex  = (req_addr >= CSR_TEX_BASE) && (req_addr < CSR_TEX_BASE + 12'(NTEX));
  assign tex_idx = req_addr - CSR_TEX_BASE;

  always_comb begin
    src0 = req_rs1[0];
    for (int t = NUM_THREADS - 1; t >= 0; t--) if (req_tmask[t]) src0 = req_rs1[t];
    if (req_func3[2]) src0 = {27'b0, req_zimm};
  end

  always_comb begin
    old0 = is_tex ? tex_q[tex_idx[$clog2(NTEX)-1:0]] : '0;
    for (int t = 0; t < NUM_THREADS; t++) begin
      unique case (req_addr)
        CSR_THREAD_ID:   rsp_data[t] = 32'(t);
        CSR_WARP_ID:     rsp_data[t] = 32'(req_wid);
        CSR_CORE_ID:     rsp_data[t] = 32'(CORE_ID);
        CSR_TMASK:       rsp_data[t] = 32'(req_tmask);
        CSR_NUM_THREADS: rsp_data[t] = 32'(NUM_THREADS);
        CSR_NUM_WARPS:   rsp_data[t] = 32'(NUM_WARPS);
        CSR_NUM_CORES:   rsp_data[t] = 32'(NUM_CORES);
        CSR_CYCLE:       rsp_data[t] = cycle_q;
        default:         rsp_data[t] = old0;
      endcase
    end
    unique case (req_func3[1:0])
      2'b01:   new0 = src0;
      2'b10:   new0 = old0 | src0;
      default: new0 = old0 & ~src0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (reset) begin
      cycle_q <= '0;
      for (int i = 0; i < NTEX; i++) tex_q[i] <= '0;
    end else begin
      cycle_q <= cycle_q + 1'b1;
      if (req_valid && is_tex) tex_q[tex_idx[$clog2(NTEX)-1:0]] <= new0;
    end
  end

  assign tex_state = tex_q;
endmodule
