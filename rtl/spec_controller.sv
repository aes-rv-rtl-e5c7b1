// spec_controller: decoder for the accelerator's custom instructions
// (R-type layout: funct7 | rs2 | rs1 | funct3 | rd | opcode).
//
//   opcode 0101011 (buffer accessing): funct3 000 latch base_addr/amount,
//                  001 load buffers from data memory, 010 store buffers to
//                  data memory (010 is this design's addition)
//   opcode 0001011 / 1001011 / 1101011: AES with 128 / 192 / 256-bit key,
//                  funct3 000 ECB, 001 CFB, 010 CBC, 011 CTR
// The opcode and funct3 values follow the paper's tables. Its AES table
// labels the third group "192" in every row while the text assigns the
// three groups to 128, 192 and 256 bits; this decoder follows the text.
// Other funct3 values and funct7 are ignored (no operation). Combinational.
module spec_controller
  import aesrv_pkg::*;
(
  input  logic [31:0] instr,
  output spec_ctrl_t  spec,
  output logic        is_spec
);

  logic [6:0] opcode;
  logic [2:0] funct3;

  always_comb begin
    opcode = instr[6:0];
    funct3 = instr[14:12];
    spec   = '0;
    spec.mode     = aes_mode_e'(funct3[1:0]);
    spec.key_size = KEY_128;
    is_spec = 1'b0;
    case (opcode)
      OPC_BUF: begin
        is_spec = 1'b1;
        spec.buf_latch = (funct3 == F3_BUF_LATCH);
        spec.buf_load  = (funct3 == F3_BUF_LOAD);
        spec.buf_store = (funct3 == F3_BUF_STORE);
      end
      OPC_AES128, OPC_AES192, OPC_AES256: begin
        is_spec = 1'b1;
        spec.aes_go = (funct3[2] == 1'b0);
        spec.key_size = (opcode == OPC_AES128) ? KEY_128 :
                        (opcode == OPC_AES192) ? KEY_192 : KEY_256;
      end
      default: ;
    endcase
  end

endmodule
