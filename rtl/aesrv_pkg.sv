// aesrv_pkg: types, instruction encodings and AES helper functions shared by
// the AES-RV accelerator.
//
// The AES functions work on 128-bit states in FIPS-197 byte order: byte 0 of
// the state is bits [127:120], bytes 0..3 form column 0, 4..7 column 1, and so
// on. The S-box is computed, not stored: the multiplicative inverse in
// GF(2^8) (as x^254) followed by the AES affine map. All functions are purely
// combinational.
//
// The custom opcodes and funct3 codes are those of the instruction tables of
// the accelerator (buffer access 0101011; AES 0001011 / 1001011 / 1101011 for
// 128 / 192 / 256-bit keys; funct3 000 ECB, 001 CFB, 010 CBC, 011 CTR). The
// funct3 010 "store buffers to data memory" code and everything about the
// RV32I base encodings beyond the standard are this design's choices.
package aesrv_pkg;

  // ------------------------------------------------------------------
  // AES configuration
  // ------------------------------------------------------------------
  typedef enum logic [1:0] {
    MODE_ECB = 2'b00,
    MODE_CFB = 2'b01,
    MODE_CBC = 2'b10,
    MODE_CTR = 2'b11
  } aes_mode_e;

  typedef enum logic [1:0] {
    KEY_128 = 2'd0,
    KEY_192 = 2'd1,
    KEY_256 = 2'd2
  } aes_keysize_e;

  localparam int unsigned MAX_ROUNDS = 14;
  localparam int unsigned MAX_KEY_WORDS = 4 * (MAX_ROUNDS + 1);  // 60

  typedef logic [127:0] aes_block_t;
  typedef aes_block_t round_keys_t [MAX_ROUNDS+1];

  function automatic logic [3:0] rounds_for(aes_keysize_e ks);
    case (ks)
      KEY_128: return 4'd10;
      KEY_192: return 4'd12;
      default: return 4'd14;
    endcase
  endfunction

  function automatic logic [3:0] key_words_for(aes_keysize_e ks);
    case (ks)
      KEY_128: return 4'd4;
      KEY_192: return 4'd6;
      default: return 4'd8;
    endcase
  endfunction

  // ------------------------------------------------------------------
  // Instruction encodings
  // ------------------------------------------------------------------
  localparam logic [6:0] OPC_LUI    = 7'b0110111;
  localparam logic [6:0] OPC_AUIPC  = 7'b0010111;
  localparam logic [6:0] OPC_JAL    = 7'b1101111;
  localparam logic [6:0] OPC_JALR   = 7'b1100111;
  localparam logic [6:0] OPC_BRANCH = 7'b1100011;
  localparam logic [6:0] OPC_LOAD   = 7'b0000011;
  localparam logic [6:0] OPC_STORE  = 7'b0100011;
  localparam logic [6:0] OPC_OPIMM  = 7'b0010011;
  localparam logic [6:0] OPC_OP     = 7'b0110011;
  localparam logic [6:0] OPC_SYSTEM = 7'b1110011;
  // custom extension
  localparam logic [6:0] OPC_BUF    = 7'b0101011;  // buffer accessing
  localparam logic [6:0] OPC_AES128 = 7'b0001011;  // Custom 1
  localparam logic [6:0] OPC_AES192 = 7'b1001011;  // Custom 2
  localparam logic [6:0] OPC_AES256 = 7'b1101011;  // Custom 3

  localparam logic [2:0] F3_BUF_LATCH = 3'b000;  // latch base_addr and amount
  localparam logic [2:0] F3_BUF_LOAD  = 3'b001;  // data memory -> buffers
  localparam logic [2:0] F3_BUF_STORE = 3'b010;  // buffers -> data memory

  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_SLL, ALU_SLT, ALU_SLTU, ALU_XOR,
    ALU_SRL, ALU_SRA, ALU_OR, ALU_AND, ALU_PASS_B
  } alu_op_e;

  typedef enum logic [1:0] {WB_ALU, WB_MEM, WB_PC4} wb_sel_e;

  // Basic controller output
  typedef struct packed {
    logic      valid_instr;  // recognised RV32I instruction
    logic      reg_write;
    logic      use_rs1;
    logic      use_rs2;
    logic      a_is_pc;      // ALU operand A = PC (AUIPC)
    logic      b_is_imm;     // ALU operand B = immediate
    alu_op_e   alu_op;
    logic      branch;
    logic      jal;
    logic      jalr;
    logic      mem_read;
    logic      mem_write;
    logic [2:0] mem_funct3;  // size / sign of load or store
    wb_sel_e   wb_sel;
    logic      halt;         // ECALL / EBREAK ends the program
    logic [31:0] imm;
  } basic_ctrl_t;

  // Spec. controller output
  typedef struct packed {
    logic         buf_latch;  // latch base_addr / amount
    logic         buf_load;   // start DM -> buffers
    logic         buf_store;  // start buffers -> DM
    logic         aes_go;     // start the specialized AES unit
    aes_mode_e    mode;
    aes_keysize_e key_size;
  } spec_ctrl_t;

  // ------------------------------------------------------------------
  // GF(2^8) arithmetic and the S-box
  // ------------------------------------------------------------------
  function automatic logic [7:0] xtime(logic [7:0] b);
    return {b[6:0], 1'b0} ^ (b[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] gf_mul(logic [7:0] a, logic [7:0] b);
    logic [7:0] p, aa;
    p  = '0;
    aa = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p ^= aa;
      aa = xtime(aa);
    end
    return p;
  endfunction

  // x^254 = x^-1 (0 maps to 0)
  function automatic logic [7:0] gf_inv(logic [7:0] x);
    logic [7:0] x2, x4, x8, x16, x32, x64, x128, r;
    x2   = gf_mul(x, x);
    x4   = gf_mul(x2, x2);
    x8   = gf_mul(x4, x4);
    x16  = gf_mul(x8, x8);
    x32  = gf_mul(x16, x16);
    x64  = gf_mul(x32, x32);
    x128 = gf_mul(x64, x64);
    r = gf_mul(x128, x64);
    r = gf_mul(r, x32);
    r = gf_mul(r, x16);
    r = gf_mul(r, x8);
    r = gf_mul(r, x4);
    r = gf_mul(r, x2);
    return r;
  endfunction

  function automatic logic [7:0] sbox(logic [7:0] x);
    logic [7:0] b, s;
    b = gf_inv(x);
    for (int i = 0; i < 8; i++)
      s[i] = b[i] ^ b[(i+4)%8] ^ b[(i+5)%8] ^ b[(i+6)%8] ^ b[(i+7)%8];
    return s ^ 8'h63;
  endfunction

  // ------------------------------------------------------------------
  // Round steps
  // ------------------------------------------------------------------
  function automatic logic [31:0] sub_word(logic [31:0] w);
    return {sbox(w[31:24]), sbox(w[23:16]), sbox(w[15:8]), sbox(w[7:0])};
  endfunction

  function automatic logic [31:0] rot_word(logic [31:0] w);
    return {w[23:0], w[31:24]};
  endfunction

  function automatic aes_block_t sub_bytes(aes_block_t s);
    aes_block_t r;
    for (int i = 0; i < 16; i++) r[127-8*i -: 8] = sbox(s[127-8*i -: 8]);
    return r;
  endfunction

  // byte (row r, column c) sits at index 4c+r; row r shifts left by r columns
  function automatic aes_block_t shift_rows(aes_block_t s);
    aes_block_t r;
    for (int c = 0; c < 4; c++)
      for (int row = 0; row < 4; row++)
        r[127-8*(4*c+row) -: 8] = s[127-8*(4*((c+row)%4)+row) -: 8];
    return r;
  endfunction

  function automatic logic [31:0] mix_column(logic [31:0] col);
    logic [7:0] a0, a1, a2, a3;
    {a0, a1, a2, a3} = col;
    return {xtime(a0) ^ (xtime(a1) ^ a1) ^ a2 ^ a3,
            a0 ^ xtime(a1) ^ (xtime(a2) ^ a2) ^ a3,
            a0 ^ a1 ^ xtime(a2) ^ (xtime(a3) ^ a3),
            (xtime(a0) ^ a0) ^ a1 ^ a2 ^ xtime(a3)};
  endfunction

  function automatic aes_block_t mix_columns(aes_block_t s);
    aes_block_t r;
    for (int c = 0; c < 4; c++) r[127-32*c -: 32] = mix_column(s[127-32*c -: 32]);
    return r;
  endfunction

endpackage
