// aes_ref_pkg: reference model of AES encryption and the ECB/CBC/CFB/CTR
// modes for the testbenches. Written independently of the RTL: the S-box is
// the FIPS-197 table (the RTL computes it), the state is a byte array and
// the key schedule is the textbook recurrence. kat_failures() checks the
// model itself against the FIPS-197 appendix C and SP 800-38A vectors.
package aes_ref_pkg;

  typedef logic [127:0] blk_t;

  localparam logic [7:0] SBOX [256] = '{
    8'h63,8'h7c,8'h77,8'h7b,8'hf2,8'h6b,8'h6f,8'hc5,8'h30,8'h01,8'h67,8'h2b,8'hfe,8'hd7,8'hab,8'h76,
    8'hca,8'h82,8'hc9,8'h7d,8'hfa,8'h59,8'h47,8'hf0,8'had,8'hd4,8'ha2,8'haf,8'h9c,8'ha4,8'h72,8'hc0,
    8'hb7,8'hfd,8'h93,8'h26,8'h36,8'h3f,8'hf7,8'hcc,8'h34,8'ha5,8'he5,8'hf1,8'h71,8'hd8,8'h31,8'h15,
    8'h04,8'hc7,8'h23,8'hc3,8'h18,8'h96,8'h05,8'h9a,8'h07,8'h12,8'h80,8'he2,8'heb,8'h27,8'hb2,8'h75,
    8'h09,8'h83,8'h2c,8'h1a,8'h1b,8'h6e,8'h5a,8'ha0,8'h52,8'h3b,8'hd6,8'hb3,8'h29,8'he3,8'h2f,8'h84,
    8'h53,8'hd1,8'h00,8'hed,8'h20,8'hfc,8'hb1,8'h5b,8'h6a,8'hcb,8'hbe,8'h39,8'h4a,8'h4c,8'h58,8'hcf,
    8'hd0,8'hef,8'haa,8'hfb,8'h43,8'h4d,8'h33,8'h85,8'h45,8'hf9,8'h02,8'h7f,8'h50,8'h3c,8'h9f,8'ha8,
    8'h51,8'ha3,8'h40,8'h8f,8'h92,8'h9d,8'h38,8'hf5,8'hbc,8'hb6,8'hda,8'h21,8'h10,8'hff,8'hf3,8'hd2,
    8'hcd,8'h0c,8'h13,8'hec,8'h5f,8'h97,8'h44,8'h17,8'hc4,8'ha7,8'h7e,8'h3d,8'h64,8'h5d,8'h19,8'h73,
    8'h60,8'h81,8'h4f,8'hdc,8'h22,8'h2a,8'h90,8'h88,8'h46,8'hee,8'hb8,8'h14,8'hde,8'h5e,8'h0b,8'hdb,
    8'he0,8'h32,8'h3a,8'h0a,8'h49,8'h06,8'h24,8'h5c,8'hc2,8'hd3,8'hac,8'h62,8'h91,8'h95,8'he4,8'h79,
    8'he7,8'hc8,8'h37,8'h6d,8'h8d,8'hd5,8'h4e,8'ha9,8'h6c,8'h56,8'hf4,8'hea,8'h65,8'h7a,8'hae,8'h08,
    8'hba,8'h78,8'h25,8'h2e,8'h1c,8'ha6,8'hb4,8'hc6,8'he8,8'hdd,8'h74,8'h1f,8'h4b,8'hbd,8'h8b,8'h8a,
    8'h70,8'h3e,8'hb5,8'h66,8'h48,8'h03,8'hf6,8'h0e,8'h61,8'h35,8'h57,8'hb9,8'h86,8'hc1,8'h1d,8'h9e,
    8'he1,8'hf8,8'h98,8'h11,8'h69,8'hd9,8'h8e,8'h94,8'h9b,8'h1e,8'h87,8'he9,8'hce,8'h55,8'h28,8'hdf,
    8'h8c,8'ha1,8'h89,8'h0d,8'hbf,8'he6,8'h42,8'h68,8'h41,8'h99,8'h2d,8'h0f,8'hb0,8'h54,8'hbb,8'h16};

  // key size code: 0 = 128, 1 = 192, 2 = 256 bits
  function automatic int nk_of(int ks);  return 4 + 2*ks;  endfunction
  function automatic int nr_of(int ks);  return 10 + 2*ks; endfunction

  function automatic logic [7:0] mul2(logic [7:0] b);
    return b[7] ? ((b << 1) ^ 8'h1b) : (b << 1);
  endfunction

  function automatic logic [31:0] subw(logic [31:0] w);
    return {SBOX[w[31:24]], SBOX[w[23:16]], SBOX[w[15:8]], SBOX[w[7:0]]};
  endfunction

  // round key r of the schedule, key word 0 in key[255:224]
  function automatic blk_t round_key(logic [255:0] key, int ks, int r);
    logic [31:0] w [60];
    logic [31:0] t;
    logic [7:0]  rc;
    int nk = nk_of(ks);
    rc = 8'h01;
    for (int i = 0; i < 60; i++) begin
      if (i < nk) w[i] = key[255-32*i -: 32];
      else begin
        t = w[i-1];
        if (i % nk == 0) begin
          t = subw({t[23:0], t[31:24]}) ^ {rc, 24'h0};
          rc = mul2(rc);
        end else if (nk == 8 && i % nk == 4) t = subw(t);
        w[i] = w[i-nk] ^ t;
      end
    end
    return {w[4*r], w[4*r+1], w[4*r+2], w[4*r+3]};
  endfunction

  function automatic blk_t encrypt(logic [255:0] key, int ks, blk_t pt);
    logic [7:0] s [16], t [16];
    blk_t rk;
    int nr = nr_of(ks);
    for (int i = 0; i < 16; i++) s[i] = pt[127-8*i -: 8];
    for (int r = 0; r <= nr; r++) begin
      if (r > 0) begin
        for (int i = 0; i < 16; i++) s[i] = SBOX[s[i]];
        // shift rows: new[c][row] = old[(c+row)%4][row]
        for (int c = 0; c < 4; c++) for (int row = 0; row < 4; row++) t[4*c+row] = s[4*((c+row)%4)+row];
        s = t;
        if (r < nr)
          for (int c = 0; c < 4; c++) begin
            logic [7:0] a0, a1, a2, a3;
            a0 = s[4*c]; a1 = s[4*c+1]; a2 = s[4*c+2]; a3 = s[4*c+3];
            s[4*c]   = mul2(a0) ^ mul2(a1) ^ a1 ^ a2 ^ a3;
            s[4*c+1] = a0 ^ mul2(a1) ^ mul2(a2) ^ a2 ^ a3;
            s[4*c+2] = a0 ^ a1 ^ mul2(a2) ^ mul2(a3) ^ a3;
            s[4*c+3] = mul2(a0) ^ a0 ^ a1 ^ a2 ^ mul2(a3);
          end
      end
      rk = round_key(key, ks, r);
      for (int i = 0; i < 16; i++) s[i] ^= rk[127-8*i -: 8];
    end
    for (int i = 0; i < 16; i++) encrypt[127-8*i -: 8] = s[i];
  endfunction

  // one block of a mode; v is the IV / chaining value / counter, updated
  // mode: 0 ECB, 1 CFB, 2 CBC, 3 CTR
  function automatic blk_t mode_step(int mode, logic [255:0] key, int ks, inout blk_t v, input blk_t p);
    blk_t c;
    case (mode)
      0: c = encrypt(key, ks, p);
      1: begin c = encrypt(key, ks, v) ^ p; v = c; end
      2: begin c = encrypt(key, ks, p ^ v); v = c; end
      default: begin c = encrypt(key, ks, v) ^ p; v = v + 128'd1; end
    endcase
    return c;
  endfunction

  function automatic int kat_failures();
    int f = 0;
    blk_t v;
    logic [255:0] k;
    k = {128'h000102030405060708090a0b0c0d0e0f, 128'h0};
    if (encrypt(k, 0, 128'h00112233445566778899aabbccddeeff) != 128'h69c4e0d86a7b0430d8cdb78070b4c55a) f++;
    k = {192'h000102030405060708090a0b0c0d0e0f1011121314151617, 64'h0};
    if (encrypt(k, 1, 128'h00112233445566778899aabbccddeeff) != 128'hdda97ca4864cdfe06eaf70a0ec0d7191) f++;
    k = 256'h000102030405060708090a0b0c0d0e0f101112131415161718191a1b1c1d1e1f;
    if (encrypt(k, 2, 128'h00112233445566778899aabbccddeeff) != 128'h8ea2b7ca516745bfeafc49904b496089) f++;
    // SP 800-38A, first block of F.1.1, F.2.1, F.3.13, F.5.1
    k = {128'h2b7e151628aed2a6abf7158809cf4f3c, 128'h0};
    v = '0;
    if (mode_step(0, k, 0, v, 128'h6bc1bee22e409f96e93d7e117393172a) != 128'h3ad77bb40d7a3660a89ecaf32466ef97) f++;
    v = 128'h000102030405060708090a0b0c0d0e0f;
    if (mode_step(2, k, 0, v, 128'h6bc1bee22e409f96e93d7e117393172a) != 128'h7649abac8119b246cee98e9b12e9197d) f++;
    v = 128'h000102030405060708090a0b0c0d0e0f;
    if (mode_step(1, k, 0, v, 128'h6bc1bee22e409f96e93d7e117393172a) != 128'h3b3fd92eb72dad20333449f8e83cfb4a) f++;
    v = 128'hf0f1f2f3f4f5f6f7f8f9fafbfcfdfeff;
    if (mode_step(3, k, 0, v, 128'h6bc1bee22e409f96e93d7e117393172a) != 128'h874d6191b620e3261bef6864990db6ce) f++;
    return f;
  endfunction

  function automatic blk_t rand_blk();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

endpackage
