// basic_controller: decoder for the RV32I base instructions of the core.
//
// Turns opcode, funct3 and funct7 into the control word basic_ctrl_t: the
// ALU operation and operand selects, branch/jump flags, load/store flags with
// their size (funct3), the write-back source, and the sign-extended
// immediate. Supported: LUI, AUIPC, JAL, JALR, BEQ..BGEU, LB/LH/LW/LBU/LHU,
// SB/SH/SW, the OP-IMM and OP groups, and ECALL/EBREAK, which this design
// uses as the end-of-program marker ('halt'). FENCE is accepted as a no-op;
// anything else decodes to valid_instr=0 and no side effect. The paper names
// this controller and its inputs (opcode, func3, func7) but not its table,
// which is the standard RV32I one. Combinational.
module basic_controller
  import aesrv_pkg::*;
(
  input  logic [31:0] instr,
  output basic_ctrl_t ctrl
);

  logic [6:0] opcode, funct7;
  logic [2:0] funct3;
  logic [31:0] imm_i, imm_s, imm_b, imm_u, imm_j;

  function automatic alu_op_e alu_from_f3(logic [2:0] f3, logic alt);
    case (f3)
      3'b000:  return alt ? ALU_SUB : ALU_ADD;
      3'b001:  return ALU_SLL;
      3'b010:  return ALU_SLT;
      3'b011:  return ALU_SLTU;
      3'b100:  return ALU_XOR;
      3'b101:  return alt ? ALU_SRA : ALU_SRL;
      3'b110:  return ALU_OR;
      default: return ALU_AND;
    endcase
  endfunction

  always_comb begin
    opcode = instr[6:0];
    funct3 = instr[14:12];
    funct7 = instr[31:25];
    imm_i = {{20{instr[31]}}, instr[31:20]};
    imm_s = {{20{instr[31]}}, instr[31:25], instr[11:7]};
    imm_b = {{19{instr[31]}}, instr[31], instr[7], instr[30:25], instr[11:8], 1'b0};
    imm_u = {instr[31:12], 12'b0};
    imm_j = {{11{instr[31]}}, instr[31], instr[19:12], instr[20], instr[30:21], 1'b0};

    ctrl = '0;
    ctrl.alu_op     = ALU_ADD;
    ctrl.wb_sel     = WB_ALU;
    ctrl.mem_funct3 = funct3;
    case (opcode)
      OPC_LUI: begin
        ctrl.valid_instr = 1'b1; ctrl.reg_write = 1'b1;
        ctrl.b_is_imm = 1'b1; ctrl.alu_op = ALU_PASS_B; ctrl.imm = imm_u;
      end
      OPC_AUIPC: begin
        ctrl.valid_instr = 1'b1; ctrl.reg_write = 1'b1;
        ctrl.a_is_pc = 1'b1; ctrl.b_is_imm = 1'b1; ctrl.imm = imm_u;
      end
      OPC_JAL: begin
        ctrl.valid_instr = 1'b1; ctrl.reg_write = 1'b1; ctrl.jal = 1'b1;
        ctrl.wb_sel = WB_PC4; ctrl.imm = imm_j;
      end
      OPC_JALR: begin
        ctrl.valid_instr = 1'b1; ctrl.reg_write = 1'b1; ctrl.jalr = 1'b1;
        ctrl.use_rs1 = 1'b1; ctrl.b_is_imm = 1'b1;
        ctrl.wb_sel = WB_PC4; ctrl.imm = imm_i;
      end
      OPC_BRANCH: begin
        ctrl.valid_instr = (funct3 != 3'b010) && (funct3 != 3'b011);
        ctrl.branch  = ctrl.valid_instr;
        ctrl.use_rs1 = 1'b1; ctrl.use_rs2 = 1'b1; ctrl.imm = imm_b;
      end
      OPC_LOAD: begin
        ctrl.valid_instr = (funct3 inside {3'b000, 3'b001, 3'b010, 3'b100, 3'b101});
        ctrl.reg_write = ctrl.valid_instr; ctrl.mem_read = ctrl.valid_instr;
        ctrl.use_rs1 = 1'b1; ctrl.b_is_imm = 1'b1;
        ctrl.wb_sel = WB_MEM; ctrl.imm = imm_i;
      end
      OPC_STORE: begin
        ctrl.valid_instr = (funct3 inside {3'b000, 3'b001, 3'b010});
        ctrl.mem_write = ctrl.valid_instr;
        ctrl.use_rs1 = 1'b1; ctrl.use_rs2 = 1'b1; ctrl.b_is_imm = 1'b1;
        ctrl.imm = imm_s;
      end
      OPC_OPIMM: begin
        ctrl.valid_instr = 1'b1; ctrl.reg_write = 1'b1;
        ctrl.use_rs1 = 1'b1; ctrl.b_is_imm = 1'b1; ctrl.imm = imm_i;
        ctrl.alu_op = alu_from_f3(funct3, (funct3 == 3'b101) && funct7[5]);
      end
      OPC_OP: begin
        ctrl.valid_instr = 1'b1; ctrl.reg_write = 1'b1;
        ctrl.use_rs1 = 1'b1; ctrl.use_rs2 = 1'b1;
        ctrl.alu_op = alu_from_f3(funct3, funct7[5]);
      end
      OPC_SYSTEM: begin
        ctrl.valid_instr = (funct3 == 3'b000);
        ctrl.halt = ctrl.valid_instr;
      end
      7'b0001111: ctrl.valid_instr = 1'b1;   // FENCE: no-op
      default: ;
    endcase
  end

endmodule
