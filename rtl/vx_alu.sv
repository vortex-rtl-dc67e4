// vx_alu: integer ALU of the execute stage, one lane per thread.
//
// Combinational. Each lane computes the RV32I arithmetic, logic, shift and
// compare operations and the low/high multiplies. For jal/jalr the lanes
// return PC+4 (the link). A branch or jump is resolved once per wavefront:
// the comparison of the lowest active thread decides the direction and the
// target is PC+imm (rs1+imm for jalr). Divergent branches are expected to be
// guarded by split/join, which is how SIMT divergence is handled in this
// design; using the lowest active lane is this implementation's choice.
module vx_alu
  import vx_pkg::*;
#(
  parameter int unsigned NUM_THREADS = 4
) (
  input  alu_op_e                alu_op,
  input  br_op_e                 br_op,
  input  logic                   is_jalr,
  input  logic                   use_pc,
  input  logic                   use_imm,
  input  logic [31:0]            imm,
  input  logic [31:0]            pc,
  input  logic [NUM_THREADS-1:0] tmask,
  input  logic [31:0]            rs1_data [NUM_THREADS],
  input  logic [31:0]            rs2_data [NUM_THREADS],
  output logic [31:0]            result   [NUM_THREADS],
  output logic                   br_taken,
  output logic [31:0]            br_dest
);
  logic [NUM_THREADS-1:0] cmp;

  for (genvar t = 0; t < NUM_THREADS; t++) begin : g_lane
    logic [31:0] a, b;
    logic [63:0] mss, msu, muu;
    assign a   = use_pc ? pc : rs1_data[t];
    assign b   = use_imm ? imm : rs2_data[t];
    assign mss = $signed({{32{a[31]}}, a}) * $signed({{32{b[31]}}, b});
    assign msu = $signed({{32{a[31]}}, a}) * $signed({32'b0, b});
    assign muu = {32'b0, a} * {32'b0, b};
    always_comb begin
      unique case (alu_op)
        ALU_ADD:    result[t] = a + b;
        ALU_SUB:    result[t] = a - b;
        ALU_SLL:    result[t] = a << b[4:0];
        ALU_SLT:    result[t] = {31'b0, $signed(a) < $signed(b)};
        ALU_SLTU:   result[t] = {31'b0, a < b};
        ALU_XOR:    result[t] = a ^ b;
        ALU_SRL:    result[t] = a >> b[4:0];
        ALU_SRA:    result[t] = $unsigned($signed(a) >>> b[4:0]);
        ALU_OR:     result[t] = a | b;
        ALU_AND:    result[t] = a & b;
        ALU_LUI:    result[t] = b;
        ALU_MUL:    result[t] = muu[31:0];
        ALU_MULH:   result[t] = mss[63:32];
        ALU_MULHSU: result[t] = msu[63:32];
        ALU_MULHU:  result[t] = muu[63:32];
        default:    result[t] = a + b;
      endcase
      if (br_op == BR_JUMP) result[t] = pc + 32'd4;
    end
    always_comb begin
      unique case (br_op)
        BR_EQ:   cmp[t] = (rs1_data[t] == rs2_data[t]);
        BR_NE:   cmp[t] = (rs1_data[t] != rs2_data[t]);
        BR_LT:   cmp[t] = ($signed(rs1_data[t]) < $signed(rs2_data[t]));
        BR_GE:   cmp[t] = ($signed(rs1_data[t]) >= $signed(rs2_data[t]));
        BR_LTU:  cmp[t] = (rs1_data[t] < rs2_data[t]);
        BR_GEU:  cmp[t] = (rs1_data[t] >= rs2_data[t]);
        BR_JUMP: cmp[t] = 1'b1;
        default: cmp[t] = 1'b0;
      endcase
    end
  end

  // lowest active thread decides
  always_comb begin
    br_taken = 1'b0;
    br_dest  = pc + imm;
    for (int t = NUM_THREADS - 1; t >= 0; t--) begin
      if (tmask[t]) begin
        br_taken = cmp[t];
        br_dest  = is_jalr ? ((rs1_data[t] + imm) & ~32'd1) : (pc + imm);
      end
    end
  end
endmodule
