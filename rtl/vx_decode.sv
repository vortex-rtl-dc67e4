// vx_decode: instruction decoder of the SIMT core.
//
// Combinational. Decodes the RV32I base set, the multiply half of the M
// extension and the six GPU instructions of the extension (wspawn, tmc,
// split, join, bar: R-type; tex: R4-type with rs3 in bits 31:27), all in the
// custom-0 opcode and told apart by funct3 (encoding chosen here; the design
// only fixes that they share one opcode). The output struct names the
// execution unit, the ALU operation, branch kind, immediate and register
// fields, and flags control instructions (branches, jumps and the wavefront
// control instructions) so that the scheduler keeps the wavefront stalled
// until execute has resolved them. Unknown encodings become a NOP.
module vx_decode
  import vx_pkg::*;
(
  input  logic [31:0] instr,
  output dec_instr_t  dec
);
  logic [6:0] opc;
  logic [2:0] f3;
  logic [6:0] f7;
  logic [31:0] imm_i, imm_s, imm_b, imm_u, imm_j;

  assign opc   = instr[6:0];
  assign f3    = instr[14:12];
  assign f7    = instr[31:25];
  assign imm_i = {{20{instr[31]}}, instr[31:20]};
  assign imm_s = {{20{instr[31]}}, instr[31:25], instr[11:7]};
  assign imm_b = {{19{instr[31]}}, instr[31], instr[7], instr[30:25], instr[11:8], 1'b0};
  assign imm_u = {instr[31:12], 12'b0};
  assign imm_j = {{11{instr[31]}}, instr[31], instr[19:12], instr[20], instr[30:21], 1'b0};

  always_comb begin
    dec          = '0;
    dec.unit     = EX_NOP;
    dec.alu_op   = ALU_ADD;
    dec.br_op    = BR_NONE;
    dec.rd       = instr[11:7];
    dec.rs1      = instr[19:15];
    dec.rs2      = instr[24:20];
    dec.rs3      = instr[31:27];
    dec.func3    = f3;
    unique case (opc)
      OPC_LUI: begin
        dec.unit = EX_ALU; dec.alu_op = ALU_LUI; dec.use_imm = 1'b1; dec.imm = imm_u; dec.wb = 1'b1;
      end
      OPC_AUIPC: begin
        dec.unit = EX_ALU; dec.use_pc = 1'b1; dec.use_imm = 1'b1; dec.imm = imm_u; dec.wb = 1'b1;
      end
      OPC_JAL: begin
        dec.unit = EX_ALU; dec.br_op = BR_JUMP; dec.imm = imm_j; dec.wb = 1'b1; dec.is_ctrl = 1'b1;
      end
      OPC_JALR: begin
        dec.unit = EX_ALU; dec.br_op = BR_JUMP; dec.is_jalr = 1'b1; dec.imm = imm_i;
        dec.use_rs1 = 1'b1; dec.wb = 1'b1; dec.is_ctrl = 1'b1;
      end
      OPC_BRANCH: begin
        dec.unit = EX_ALU; dec.imm = imm_b; dec.use_rs1 = 1'b1; dec.use_rs2 = 1'b1; dec.is_ctrl = 1'b1;
        unique case (f3)
          3'b000: dec.br_op = BR_EQ;
          3'b001: dec.br_op = BR_NE;
          3'b100: dec.br_op = BR_LT;
          3'b101: dec.br_op = BR_GE;
          3'b110: dec.br_op = BR_LTU;
          3'b111: dec.br_op = BR_GEU;
          default: begin dec.unit = EX_NOP; dec.is_ctrl = 1'b0; end
        endcase
      end
      OPC_LOAD: begin
        dec.unit = EX_LSU; dec.imm = imm_i; dec.use_rs1 = 1'b1; dec.wb = 1'b1;
      end
      OPC_STORE: begin
        dec.unit = EX_LSU; dec.imm = imm_s; dec.use_rs1 = 1'b1; dec.use_rs2 = 1'b1; dec.is_store = 1'b1;
      end
      OPC_OPIMM: begin
        dec.unit = EX_ALU; dec.imm = imm_i; dec.use_rs1 = 1'b1; dec.use_imm = 1'b1; dec.wb = 1'b1;
        unique case (f3)
          3'b000: dec.alu_op = ALU_ADD;
          3'b001: dec.alu_op = ALU_SLL;
          3'b010: dec.alu_op = ALU_SLT;
          3'b011: dec.alu_op = ALU_SLTU;
          3'b100: dec.alu_op = ALU_XOR;
          3'b101: dec.alu_op = f7[5] ? ALU_SRA : ALU_SRL;
          3'b110: dec.alu_op = ALU_OR;
          default: dec.alu_op = ALU_AND;
        endcase
      end
      OPC_OP: begin
        dec.unit = EX_ALU; dec.use_rs1 = 1'b1; dec.use_rs2 = 1'b1; dec.wb = 1'b1;
        if (f7 == 7'b0000001) begin
          unique case (f3)
            3'b000: dec.alu_op = ALU_MUL;
            3'b001: dec.alu_op = ALU_MULH;
            3'b010: dec.alu_op = ALU_MULHSU;
            3'b011: dec.alu_op = ALU_MULHU;
            default: begin dec.unit = EX_NOP; dec.wb = 1'b0; end   // divide: not supported
          endcase
        end else begin
          unique case (f3)
            3'b000: dec.alu_op = f7[5] ? ALU_SUB : ALU_ADD;
            3'b001: dec.alu_op = ALU_SLL;
            3'b010: dec.alu_op = ALU_SLT;
            3'b011: dec.alu_op = ALU_SLTU;
            3'b100: dec.alu_op = ALU_XOR;
            3'b101: dec.alu_op = f7[5] ? ALU_SRA : ALU_SRL;
            3'b110: dec.alu_op = ALU_OR;
            default: dec.alu_op = ALU_AND;
          endcase
        end
      end
      OPC_SYSTEM: begin
        if (f3 != 3'b000) begin
          dec.unit = EX_CSR; dec.wb = 1'b1; dec.imm = {20'b0, instr[31:20]};
          dec.use_rs1 = ~f3[2];    // immediate forms use the rs1 field as zimm
        end
      end
      OPC_GPU: begin
        unique case (f3)
          GPU_TMC:    begin dec.unit = EX_GPU; dec.use_rs1 = 1'b1; dec.is_ctrl = 1'b1; end
          GPU_WSPAWN: begin dec.unit = EX_GPU; dec.use_rs1 = 1'b1; dec.use_rs2 = 1'b1; dec.is_ctrl = 1'b1; end
          GPU_SPLIT:  begin dec.unit = EX_GPU; dec.use_rs1 = 1'b1; dec.is_ctrl = 1'b1; end
          GPU_JOIN:   begin dec.unit = EX_GPU; dec.is_ctrl = 1'b1; end
          GPU_BAR:    begin dec.unit = EX_GPU; dec.use_rs1 = 1'b1; dec.use_rs2 = 1'b1; dec.is_ctrl = 1'b1; end
          GPU_TEX:    begin
            dec.unit = EX_TEX; dec.use_rs1 = 1'b1; dec.use_rs2 = 1'b1; dec.use_rs3 = 1'b1; dec.wb = 1'b1;
          end
          default: dec.unit = EX_NOP;
        endcase
      end
      default: dec.unit = EX_NOP;   // fence and unknown: no operation
    endcase
    if (dec.rd == '0) dec.wb = 1'b0;
  end
endmodule
