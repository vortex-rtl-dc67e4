// vx_scoreboard: register scoreboard of the issue stage.
//
// One pending bit per register per wavefront. An instruction may issue only
// when none of the registers it reads or writes is pending (RAW and WAW
// hazards). Issuing an instruction that writes rd sets its bit; the writeback
// of rd clears it. x0 is never pending.
//
// Timing: busy is combinational from the candidate's registers; set and clear
// act at the clock edge, a clear in the same cycle as the check does not
// unblock it (the check sees the registered state).
module vx_scoreboard #(
  parameter int unsigned NUM_WARPS = 4,
  localparam int unsigned WB = (NUM_WARPS > 1) ? $clog2(NUM_WARPS) : 1
) (
  input  logic          clk,
  input  logic          reset,
  input  logic [WB-1:0] chk_wid,
  input  logic [4:0]    chk_rs1, chk_rs2, chk_rs3, chk_rd,
  input  logic          chk_use_rs1, chk_use_rs2, chk_use_rs3, chk_wb,
  output logic          busy,
  input  logic          set_valid,
  input  logic [WB-1:0] set_wid,
  input  logic [4:0]    set_rd,
  input  logic          clr_valid,
  input  logic [WB-1:0] clr_wid,
  input  logic [4:0]    clr_rd
);
  logic [31:0] pend_q [NUM_WARPS];
  logic [31:0] p;

  assign p    = pend_q[chk_wid];
  assign busy = (chk_use_rs1 && p[chk_rs1]) || (chk_use_rs2 && p[chk_rs2]) ||
                (chk_use_rs3 && p[chk_rs3]) || (chk_wb && p[chk_rd]);

  always_ff @(posedge clk) begin
    if (reset) begin
      for (int w = 0; w < NUM_WARPS; w++) pend_q[w] <= '0;
    end else begin
      if (clr_valid) pend_q[clr_wid][clr_rd] <= 1'b0;
      if (set_valid && set_rd != '0) pend_q[set_wid][set_rd] <= 1'b1;
    end
  end
endmodule
