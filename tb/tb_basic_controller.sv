// Testbench for basic_controller: one instruction of each RV32I class,
// assembled here, with the expected control fields and immediates.
module tb_basic_controller;
  import aesrv_pkg::*;
  logic [31:0] instr;
  basic_ctrl_t c;
  int checks = 0, failures = 0;

  basic_controller dut (.instr, .ctrl(c));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_true(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (instr %h)", what, instr); end
  endtask

  initial begin
    instr = 32'h12345537; #1;                       // lui x10, 0x12345
    expect_true(c.valid_instr && c.reg_write && c.alu_op == ALU_PASS_B && c.imm == 32'h12345000, "lui");
    instr = 32'hfff00517; #1;                       // auipc x10, 0xfff00
    expect_true(c.a_is_pc && c.b_is_imm && c.imm == 32'hfff00000 && c.alu_op == ALU_ADD, "auipc");
    instr = 32'hff9ff0ef; #1;                       // jal x1, -8
    expect_true(c.jal && c.wb_sel == WB_PC4 && c.imm == 32'hfffffff8, "jal");
    instr = 32'h00c50067; #1;                       // jalr x0, 12(x10)
    expect_true(c.jalr && c.use_rs1 && c.imm == 32'd12, "jalr");
    instr = 32'hfe208ee3; #1;                       // beq x1, x2, -4
    expect_true(c.branch && !c.reg_write && c.imm == 32'hfffffffc && c.mem_funct3 == 3'b000, "beq");
    instr = 32'h0080a183; #1;                       // lw x3, 8(x1)
    expect_true(c.mem_read && c.wb_sel == WB_MEM && c.imm == 32'd8 && c.mem_funct3 == 3'b010, "lw");
    instr = 32'hffc0c183; #1;                       // lbu x3, -4(x1)
    expect_true(c.mem_read && c.imm == 32'hfffffffc && c.mem_funct3 == 3'b100, "lbu");
    instr = 32'h0030a623; #1;                       // sw x3, 12(x1)
    expect_true(c.mem_write && !c.reg_write && c.imm == 32'd12 && c.use_rs2, "sw");
    instr = 32'hfe308fa3; #1;                       // sb x3, -1(x1)
    expect_true(c.mem_write && c.imm == 32'hffffffff && c.mem_funct3 == 3'b000, "sb");
    instr = 32'h80008093; #1;                       // addi x1, x1, -2048
    expect_true(c.alu_op == ALU_ADD && c.b_is_imm && c.imm == 32'hfffff800, "addi");
    instr = 32'h4020d093; #1;                       // srai x1, x1, 2
    expect_true(c.alu_op == ALU_SRA, "srai");
    instr = 32'h0020d093; #1;                       // srli x1, x1, 2
    expect_true(c.alu_op == ALU_SRL, "srli");
    instr = 32'h402081b3; #1;                       // sub x3, x1, x2
    expect_true(c.alu_op == ALU_SUB && !c.b_is_imm && c.use_rs2, "sub");
    instr = 32'h0020b1b3; #1;                       // sltu x3, x1, x2
    expect_true(c.alu_op == ALU_SLTU, "sltu");
    instr = 32'h0020f1b3; #1;                       // and x3, x1, x2
    expect_true(c.alu_op == ALU_AND, "and");
    instr = 32'h00000073; #1;                       // ecall
    expect_true(c.halt && c.valid_instr && !c.reg_write, "ecall");
    instr = 32'h0000000b; #1;                       // custom opcode: not a base instruction
    expect_true(!c.valid_instr && !c.reg_write && !c.mem_write, "custom");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
