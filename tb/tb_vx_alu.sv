// tb_vx_alu: self-checking testbench of the SIMD integer ALU.
// Random operands for every thread are checked against a reference for add,
// sub, shifts, compares, logic, lui and the four multiplies; branches are
// checked for the taken decision of the lowest active thread and the
// destination, jumps for the link value pc+4. Purely combinational.
module tb_vx_alu;
  import vx_pkg::*;
  int unsigned checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  task automatic chk(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask
  alu_op_e alu_op; br_op_e br_op;
  logic is_jalr, use_pc, use_imm, br_taken;
  logic [31:0] imm, pc, br_dest;
  logic [3:0] tmask;
  logic [31:0] rs1_data [4], rs2_data [4], result [4];
  vx_alu #(.NUM_THREADS(4)) dut (.*);
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  function automatic logic [31:0] ref_op(alu_op_e op, logic [31:0] a, logic [31:0] b);
    case (op)
      ALU_ADD: return a + b;   ALU_SUB: return a - b;
      ALU_SLL: return a << b[4:0]; ALU_SRL: return a >> b[4:0];
      ALU_SRA: return $signed(a) >>> b[4:0];
      ALU_SLT: return {31'd0, $signed(a) < $signed(b)}; ALU_SLTU: return {31'd0, a < b};
      ALU_XOR: return a ^ b; ALU_OR: return a | b; ALU_AND: return a & b;
      ALU_LUI: return b;
      ALU_MUL: return 32'(a * b);
      ALU_MULH: begin logic signed [63:0] p; p = $signed({{32{a[31]}}, a}) * $signed({{32{b[31]}}, b}); return p[63:32]; end
      ALU_MULHSU: begin logic signed [63:0] p; p = $signed({{32{a[31]}}, a}) * $signed({32'd0, b}); return p[63:32]; end
      default: begin logic [63:0] p; p = {32'd0, a} * {32'd0, b}; return p[63:32]; end
    endcase
  endfunction
  initial begin
    alu_op_e ops [15];
    ops = '{ALU_ADD, ALU_SUB, ALU_SLL, ALU_SLT, ALU_SLTU, ALU_XOR, ALU_SRL, ALU_SRA,
            ALU_OR, ALU_AND, ALU_LUI, ALU_MUL, ALU_MULH, ALU_MULHSU, ALU_MULHU};
    is_jalr = 0; use_pc = 0; use_imm = 0; imm = 0; pc = 32'h8000_0100; tmask = 4'hF; br_op = BR_NONE;
    for (int t = 0; t < 4; t++) begin rs1_data[t] = 0; rs2_data[t] = 0; end
    for (int r = 0; r < 500; r++) begin
      alu_op = ops[$urandom % 15];
      for (int t = 0; t < 4; t++) begin rs1_data[t] = $urandom; rs2_data[t] = $urandom; end
      #1;
      for (int t = 0; t < 4; t++) chk($sformatf("%s t%0d", alu_op.name(), t), result[t], ref_op(alu_op, rs1_data[t], rs2_data[t]));
    end
    // branches: lowest active thread decides
    alu_op = ALU_ADD; use_imm = 1'b0;
    for (int r = 0; r < 100; r++) begin
      int lo;
      tmask = 4'($urandom) | 4'b1000;
      lo = 0; while (!tmask[lo]) lo++;
      imm = 32'($signed(12'($urandom & 12'hFFE)));
      br_op = BR_EQ;
      for (int t = 0; t < 4; t++) begin rs1_data[t] = $urandom % 2; rs2_data[t] = $urandom % 2; end
      #1;
      chk("beq taken", br_taken, rs1_data[lo] == rs2_data[lo]);
      chk("beq dest", br_dest, 32'(pc + imm));
    end
    br_op = BR_JUMP; use_pc = 1'b1; use_imm = 1'b1; imm = 32'h40; tmask = 4'hF; #1;
    chk("jal taken", br_taken, 1);
    chk("jal dest", br_dest, pc + 32'h40);
    chk("jal link", result[0], pc + 4);
    begin
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  end
endmodule
