// vx_gpr: banked general-purpose registers.
//
// One bank per thread, each holding the 32 registers of every wavefront, so a
// whole wavefront's operand vector is read in one access. Three read ports
// (rs1, rs2, rs3 for the R4 tex instruction) and one write port whose thread
// mask selects the banks written. x0 reads as zero. Reads are combinational
// (distributed RAM); writes act at the clock edge, and a read in the same
// cycle sees the old value. Registers start at zero after reset.
module vx_gpr #(
  parameter int unsigned NUM_WARPS   = 4,
  parameter int unsigned NUM_THREADS = 4,
  localparam int unsigned WB = (NUM_WARPS > 1) ? $clog2(NUM_WARPS) : 1
) (
  input  logic                   clk,
  input  logic                   reset,
  input  logic [WB-1:0]          rd_wid,
  input  logic [4:0]             rs1, rs2, rs3,
  output logic [31:0]            rs1_data [NUM_THREADS],
  output logic [31:0]            rs2_data [NUM_THREADS],
  output logic [31:0]            rs3_data [NUM_THREADS],
  input  logic                   wr_valid,
  input  logic [WB-1:0]          wr_wid,
  input  logic [4:0]             wr_rd,
  input  logic [NUM_THREADS-1:0] wr_tmask,
  input  logic [31:0]            wr_data  [NUM_THREADS]
);
  logic [31:0] regs [NUM_THREADS][NUM_WARPS * 32];

  for (genvar t = 0; t < NUM_THREADS; t++) begin : g_bank
    assign rs1_data[t] = (rs1 == '0) ? '0 : regs[t][{rd_wid, rs1}];
    assign rs2_data[t] = (rs2 == '0) ? '0 : regs[t][{rd_wid, rs2}];
    assign rs3_data[t] = (rs3 == '0) ? '0 : regs[t][{rd_wid, rs3}];
    always_ff @(posedge clk) begin
      if (reset) begin
        for (int i = 0; i < NUM_WARPS * 32; i++) regs[t][i] <= '0;
      end else if (wr_valid && wr_tmask[t]) begin
        regs[t][{wr_wid, wr_rd}] <= wr_data[t];
      end
    end
  end
endmodule
