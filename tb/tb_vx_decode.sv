// tb_vx_decode: self-checking testbench of the instruction decoder.
// Hand-encoded instructions of every class (ALU register and immediate, lui,
// auipc, branch, jal, jalr, load, store, multiply, CSR, and the six GPU
// instructions tmc, wspawn, split, join, bar, tex) are decoded and their unit,
// operation, register fields, immediate and flags checked; a write to x0
// must not write back. Random register fields are used. Combinational.
module tb_vx_decode;
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
  logic [31:0] instr;
  dec_instr_t dec;
  vx_decode dut (.instr, .dec);
  initial begin
    for (int r = 0; r < 100; r++) begin
      logic [4:0] rd, rs1, rs2, rs3; logic [11:0] im;
      rd = 5'($urandom % 31 + 1); rs1 = 5'($urandom); rs2 = 5'($urandom); rs3 = 5'($urandom); im = 12'($urandom);
      instr = {im, rs1, 3'd0, rd, 7'h13}; #1;       // addi
      chk("addi unit", dec.unit, EX_ALU); chk("addi op", dec.alu_op, ALU_ADD); chk("addi imm", dec.imm, {{20{im[11]}}, im});
      chk("addi rd", dec.rd, rd); chk("addi rs1", dec.rs1, rs1); chk("addi wb", dec.wb, 1); chk("addi use_imm", dec.use_imm, 1);
      instr = {7'h20, rs2, rs1, 3'd0, rd, 7'h33}; #1; // sub
      chk("sub op", dec.alu_op, ALU_SUB); chk("sub rs2", dec.rs2, rs2); chk("sub use_rs2", dec.use_rs2, 1);
      instr = {7'h01, rs2, rs1, 3'd0, rd, 7'h33}; #1; // mul
      chk("mul op", dec.alu_op, ALU_MUL);
      instr = {im[6:0], rs2, rs1, 3'd1, im[11:7], 7'h63}; #1; // bne
      chk("bne br", dec.br_op, BR_NE); chk("bne ctrl", dec.is_ctrl, 1); chk("bne wb", dec.wb, 0);
      instr = {im, rs1, 3'd2, rd, 7'h03}; #1;        // lw
      chk("lw unit", dec.unit, EX_LSU); chk("lw store", dec.is_store, 0); chk("lw func3", dec.func3, 2);
      instr = {im[11:5], rs2, rs1, 3'd2, im[4:0], 7'h23}; #1; // sw
      chk("sw unit", dec.unit, EX_LSU); chk("sw store", dec.is_store, 1); chk("sw imm", dec.imm, {{20{im[11]}}, im}); chk("sw wb", dec.wb, 0);
      instr = {12'hCC0, 5'd0, 3'd2, rd, 7'h73}; #1;  // csrr
      chk("csr unit", dec.unit, EX_CSR); chk("csr addr", dec.imm[11:0], 12'hCC0);
      instr = {20'($urandom), rd, 7'h37}; #1;        // lui
      chk("lui op", dec.alu_op, ALU_LUI); chk("lui imm", dec.imm, {instr[31:12], 12'd0});
      instr = {20'h00010, rd, 7'h6F}; #1;            // jal
      chk("jal br", dec.br_op, BR_JUMP); chk("jal ctrl", dec.is_ctrl, 1); chk("jal wb", dec.wb, 1);
      instr = {im, rs1, 3'd0, rd, 7'h67}; #1;        // jalr
      chk("jalr", dec.is_jalr, 1);
      for (int g = 0; g < 5; g++) begin
        instr = {7'd0, rs2, rs1, 3'(g), 5'd0, 7'h0B}; #1;
        chk("gpu unit", dec.unit, EX_GPU); chk("gpu func3", dec.func3, g); chk("gpu ctrl", dec.is_ctrl, 1); chk("gpu wb", dec.wb, 0);
      end
      instr = {rs3, 2'b00, rs2, rs1, 3'd5, rd, 7'h0B}; #1; // tex
      chk("tex unit", dec.unit, EX_TEX); chk("tex rs3", dec.rs3, rs3); chk("tex use_rs3", dec.use_rs3, 1); chk("tex rd", dec.rd, rd); chk("tex ctrl", dec.is_ctrl, 0);
      instr = {im, rs1, 3'd0, 5'd0, 7'h13}; #1;      // addi x0
      chk("x0 no wb", dec.wb, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
