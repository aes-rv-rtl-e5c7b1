// aesrv_prog_pkg: the test program for the accelerator and its expected
// results, shared by the core and top-level testbenches.
//
// Data-memory layout of one job at word base B (inside one half):
//   B+0..7 key, B+8..11 IV/counter, B+12.. n plaintext blocks.
// The program loads key, IV and data into the buffers in one transfer, runs
// the AES instruction on n blocks, stores the final chaining value and the
// results back over B+8.., then sums the result words with a load/add loop
// (load-use stall and taken branches), calls a subroutine (JAL/JALR), tests
// a byte store and a half-word load, and ends with ECALL.
//   CHK = B+12+4n: sum of result words; CHK+1: 77 from the subroutine;
//   CHK+2: low byte of the sum in byte 1; CHK+3: the same read back by LHU.
package aesrv_prog_pkg;
  import rv_asm_pkg::*;

  typedef logic [31:0] word_q_t [$];

  function automatic word_q_t build(int ks, int mode, int n, int base);
    word_q_t p;
    int chk = base + 12 + 4*n;
    p.push_back(addi(8, 0, base));                 // r8  = DM base
    p.push_back(addi(20, 0, 12 + 4*n));            // r20 = amount, buffer index 0
    p.push_back(buf_latch(8, 20));
    p.push_back(buf_load());
    p.push_back(addi(5, 0, n));
    p.push_back(aes(ks, mode, 5));
    p.push_back(addi(8, 0, base + 8));
    p.push_back(lui(20, 32'h80));                  // buffer index 8 in bits [23:16]
    p.push_back(addi(20, 20, 4 + 4*n));
    p.push_back(buf_latch(8, 20));
    p.push_back(buf_store());
    p.push_back(addi(10, 0, (base + 12) * 4));     // 11
    p.push_back(addi(11, 0, 4*n));
    p.push_back(addi(12, 0, 0));
    p.push_back(lw(13, 10, 0));                    // 14: loop
    p.push_back(add(12, 12, 13));                  // uses the load at once
    p.push_back(addi(10, 10, 4));
    p.push_back(addi(11, 11, -1));
    p.push_back(bne(11, 0, -16));                  // 18
    p.push_back(sw(12, 0, chk * 4));
    p.push_back(jal(1, (28 - 20) * 4));            // 20
    p.push_back(sw(14, 0, (chk + 1) * 4));
    p.push_back(sw(0, 0, (chk + 2) * 4));
    p.push_back(sb(12, 0, (chk + 2) * 4 + 1));
    p.push_back(lhu(15, 0, (chk + 2) * 4));
    p.push_back(sw(15, 0, (chk + 3) * 4));
    p.push_back(ecall());                          // 26
    p.push_back(addi(14, 0, 1));                   // never executed
    p.push_back(addi(14, 0, 77));                  // 28: subroutine
    p.push_back(jalr(0, 1, 0));
    return p;
  endfunction
endpackage
