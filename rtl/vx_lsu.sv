// vx_lsu: load/store unit, one address lane per thread.
//
// Takes one memory instruction at a time. Each active thread's address
// (rs1 + imm) is sent either to the shared memory (addresses in
// [SMEM_BASE, SMEM_BASE+SMEM_SIZE)) or to the data cache. Lanes that a
// memory does not accept in a cycle (bank conflicts) are retried on the next
// cycles until every lane has been issued. A store completes when all lanes
// are issued; a load collects the per-lane responses (in any order and over
// any number of cycles) and then presents the aligned and sign/zero-extended
// RV32I load result to writeback. One instruction in flight and the address
// map of the shared memory are this implementation's choices.
//
// Interface: req valid/ready; dcache and smem lane requests with per-lane
// ready; responses with a lane mask; result valid/ready.
module vx_lsu #(
  parameter int unsigned NUM_THREADS = 4,
  parameter int unsigned WB          = 2,
  parameter logic [31:0] SMEM_BASE   = 32'hFF00_0000,
  parameter int unsigned SMEM_SIZE   = 16384
) (
  input  logic                   clk,
  input  logic                   reset,
  input  logic                   req_valid,
  output logic                   req_ready,
  input  logic [WB-1:0]          req_wid,
  input  logic [NUM_THREADS-1:0] req_tmask,
  input  logic                   req_store,
  input  logic [2:0]             req_func3,
  input  logic [4:0]             req_rd,
  input  logic                   req_wb,
  input  logic [31:0]            req_imm,
  input  logic [31:0]            req_base  [NUM_THREADS],
  input  logic [31:0]            req_wdata [NUM_THREADS],
  // data cache
  output logic [NUM_THREADS-1:0] dc_req_valid,
  input  logic [NUM_THREADS-1:0] dc_req_ready,
  output logic                   dc_req_rw,
  output logic [31:0]            dc_req_addr   [NUM_THREADS],
  output logic [3:0]             dc_req_byteen [NUM_THREADS],
  output logic [31:0]            dc_req_data   [NUM_THREADS],
  input  logic                   dc_rsp_valid,
  input  logic [NUM_THREADS-1:0] dc_rsp_mask,
  input  logic [31:0]            dc_rsp_data [NUM_THREADS],
  // shared memory
  output logic [NUM_THREADS-1:0] sm_req_valid,
  input  logic [NUM_THREADS-1:0] sm_req_ready,
  input  logic                   sm_rsp_valid,
  input  logic [NUM_THREADS-1:0] sm_rsp_mask,
  input  logic [31:0]            sm_rsp_data [NUM_THREADS],
  // result to writeback
  output logic                   rsp_valid,
  input  logic                   rsp_ready,
  output logic [WB-1:0]          rsp_wid,
  output logic [NUM_THREADS-1:0] rsp_tmask,
  output logic [4:0]             rsp_rd,
  output logic                   rsp_wb,
  output logic [31:0]            rsp_data [NUM_THREADS]
);
  typedef enum logic [1:0] { S_IDLE, S_ISSUE, S_WAIT, S_DONE } state_e;
  state_e state_q;

  logic [WB-1:0]          wid_q;
  logic [NUM_THREADS-1:0] tmask_q, pend_q, need_q;
  logic                   store_q, wb_q;
  logic [2:0]             f3_q;
  logic [4:0]             rd_q;
  logic [31:0]            addr_q [NUM_THREADS];
  logic [31:0]            wdata_q[NUM_THREADS];
  logic [31:0]            rdata_q[NUM_THREADS];
  logic [NUM_THREADS-1:0] is_sm;

  for (genvar t = 0; t < NUM_THREADS; t++) begin : g_lane
    logic [1:0] bo;
    assign bo       = addr_q[t][1:0];
    assign is_sm[t] = (addr_q[t] >= SMEM_BASE) && (addr_q[t] < SMEM_BASE + SMEM_SIZE);
    assign dc_req_addr[t] = addr_q[t];
    always_comb begin
      unique case (f3_q[1:0])
        2'b00:   begin dc_req_byteen[t] = 4'b0001 << bo; dc_req_data[t] = wdata_q[t] << (8 * bo); end
        2'b01:   begin dc_req_byteen[t] = 4'b0011 << bo; dc_req_data[t] = wdata_q[t] << (8 * bo); end
        default: begin dc_req_byteen[t] = 4'b1111;       dc_req_data[t] = wdata_q[t]; end
      endcase
    end
    // load alignment and extension
    always_comb begin
      logic [31:0] w;
      w = rdata_q[t] >> (8 * bo);
      unique case (f3_q)
        3'b000:  rsp_data[t] = {{24{w[7]}}, w[7:0]};
        3'b001:  rsp_data[t] = {{16{w[15]}}, w[15:0]};
        3'b100:  rsp_data[t] = {24'b0, w[7:0]};
        3'b101:  rsp_data[t] = {16'b0, w[15:0]};
        default: rsp_data[t] = rdata_q[t];
      endcase
    end
  end

  assign dc_req_rw    = store_q;
  assign dc_req_valid = (state_q == S_ISSUE) ? (pend_q & ~is_sm) : '0;
  assign sm_req_valid = (state_q == S_ISSUE) ? (pend_q &  is_sm) : '0;

  assign req_ready = (state_q == S_IDLE);
  assign rsp_valid = (state_q == S_DONE);
  assign rsp_wid   = wid_q;
  assign rsp_tmask = tmask_q;
  assign rsp_rd    = rd_q;
  assign rsp_wb    = wb_q;

  logic [NUM_THREADS-1:0] issued, got, pend_n, need_n;
  assign issued = (dc_req_valid & dc_req_ready) | (sm_req_valid & sm_req_ready);
  assign got    = (dc_rsp_valid ? dc_rsp_mask : '0) | (sm_rsp_valid ? sm_rsp_mask : '0);
  assign pend_n = pend_q & ~issued;
  assign need_n = need_q & ~got;

  always_ff @(posedge clk) begin
    if (reset) begin
      state_q <= S_IDLE;
      pend_q  <= '0;
      need_q  <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (req_valid) begin
          wid_q   <= req_wid;
          tmask_q <= req_tmask;
          store_q <= req_store;
          wb_q    <= req_wb;
          f3_q    <= req_func3;
          rd_q    <= req_rd;
          for (int t = 0; t < NUM_THREADS; t++) begin
            addr_q[t]  <= req_base[t] + req_imm;
            wdata_q[t] <= req_wdata[t];
          end
          pend_q  <= req_tmask;
          need_q  <= req_store ? '0 : req_tmask;
          state_q <= (req_tmask == '0) ? (req_store ? S_IDLE : S_DONE) : S_ISSUE;
        end
        S_ISSUE: begin
          pend_q <= pend_n;
          need_q <= need_n;
          if (pend_n == '0) state_q <= store_q ? S_IDLE : ((need_n == '0) ? S_DONE : S_WAIT);
        end
        S_WAIT: begin
          need_q <= need_n;
          if (need_n == '0) state_q <= S_DONE;
        end
        default: if (rsp_ready) state_q <= S_IDLE;
      endcase
      for (int t = 0; t < NUM_THREADS; t++) begin
        if (dc_rsp_valid && dc_rsp_mask[t]) rdata_q[t] <= dc_rsp_data[t];
        if (sm_rsp_valid && sm_rsp_mask[t]) rdata_q[t] <= sm_rsp_data[t];
      end
    end
  end
endmodule
