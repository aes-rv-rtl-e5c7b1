// Testbench for alu: every operation on random and corner operands against
// expressions evaluated here.
module tb_alu;
  import aesrv_pkg::*;
  alu_op_e op;
  logic [31:0] a, b, y, e;
  int checks = 0, failures = 0;

  alu dut (.op, .a, .b, .y);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 4000; t++) begin
      op = alu_op_e'(t % 11);
      a = (t % 13 == 0) ? 32'h8000_0000 : $urandom;
      b = (t % 17 == 0) ? 32'hffff_ffff : $urandom;
      #1;
      case (op)
        ALU_ADD:  e = a + b;
        ALU_SUB:  e = a - b;
        ALU_SLL:  e = a << b[4:0];
        ALU_SLT:  e = (int'(a) < int'(b)) ? 1 : 0;
        ALU_SLTU: e = (a < b) ? 1 : 0;
        ALU_XOR:  e = a ^ b;
        ALU_SRL:  e = a >> b[4:0];
        ALU_SRA:  e = 32'(int'(a) >>> b[4:0]);
        ALU_OR:   e = a | b;
        ALU_AND:  e = a & b;
        default:  e = b;
      endcase
      checks++;
      if (y !== e) begin failures++; $display("FAIL op %0d a %h b %h y %h e %h", op, a, b, y, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
