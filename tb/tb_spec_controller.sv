// Testbench for spec_controller: every opcode/funct3 pair of the custom
// instruction tables, plus non-custom opcodes, against the expected decode.
module tb_spec_controller;
  import aesrv_pkg::*;
  logic [31:0] instr;
  spec_ctrl_t spec;
  logic is_spec;
  int checks = 0, failures = 0;

  spec_controller dut (.instr, .spec, .is_spec);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic [6:0] opc, logic [2:0] f3, logic e_spec, logic e_lat, logic e_ld,
                     logic e_st, logic e_aes, int e_mode, int e_ks);
    instr = {7'($urandom), 5'($urandom), 5'($urandom), f3, 5'($urandom), opc};
    #1;
    checks++;
    if (is_spec !== e_spec || spec.buf_latch !== e_lat || spec.buf_load !== e_ld ||
        spec.buf_store !== e_st || spec.aes_go !== e_aes ||
        (e_aes && (int'(spec.mode) != e_mode || int'(spec.key_size) != e_ks))) begin
      failures++; $display("FAIL opcode %b funct3 %b", opc, f3);
    end
  endtask

  initial begin
    chk(7'b0101011, 3'b000, 1, 1, 0, 0, 0, 0, 0);
    chk(7'b0101011, 3'b001, 1, 0, 1, 0, 0, 0, 0);
    chk(7'b0101011, 3'b010, 1, 0, 0, 1, 0, 0, 0);
    chk(7'b0101011, 3'b111, 1, 0, 0, 0, 0, 0, 0);
    for (int f = 0; f < 4; f++) begin
      chk(7'b0001011, 3'(f), 1, 0, 0, 0, 1, f, 0);
      chk(7'b1001011, 3'(f), 1, 0, 0, 0, 1, f, 1);
      chk(7'b1101011, 3'(f), 1, 0, 0, 0, 1, f, 2);
    end
    chk(7'b0001011, 3'b100, 1, 0, 0, 0, 0, 0, 0);
    chk(7'b0110011, 3'b000, 0, 0, 0, 0, 0, 0, 0);
    chk(7'b0000011, 3'b010, 0, 0, 0, 0, 0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
