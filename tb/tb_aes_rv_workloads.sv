// Workload testbench for aes_rv_top at its default sizes: the two streaming
// benchmarks the accelerator was evaluated with.
//
//   Part 1: 8,192 blocks of AES-128-CBC, one chained stream. The stream is cut
//           into jobs of 32 blocks; after each job the host reads the final
//           chaining value the core wrote back and seeds the next job's IV
//           with it, so the whole stream is one CBC encryption.
//   Part 2: 100,000 random plaintext blocks for each of ECB, CFB, CBC and CTR,
//           in jobs of up to 61 blocks (the most the 256-word buffer set
//           holds next to key and IV), each job with a fresh random key and
//           IV and the key size cycling 128/192/256.
//
// As in real use, the instruction memory is loaded once (a dispatcher plus
// one routine per mode and key size) and the host works in the ping-pong
// schedule: while the core runs job j on one half of the data memory, the
// host reads the ciphertext of job j-1 and writes the input of job j+1 into
// the other half. Every ciphertext block and chaining value is compared with
// the reference model. The testbench prints the core's busy cycles per block
// and the resulting throughput at the 241 MHz clock the accelerator was
// reported at, for comparison with the published figures; those numbers are
// informational, not checks.
module tb_aes_rv_workloads;
  import aes_ref_pkg::*;
  import rv_asm_pkg::*;

  localparam int BASE    = 16;       // job area inside a half (word address)
  localparam int RT0     = 16;       // first routine (word address)
  localparam int RTS     = 16;       // routine stride (words)
  localparam int STREAM  = 8192;
  localparam int PERMODE = 100000;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [17:0] s_axi_awaddr = '0, s_axi_araddr = '0;
  logic s_axi_awvalid = 1'b0, s_axi_wvalid = 1'b0, s_axi_bready = 1'b0;
  logic s_axi_arvalid = 1'b0, s_axi_rready = 1'b0;
  logic [31:0] s_axi_wdata = '0;
  logic [3:0] s_axi_wstrb = '0;
  logic s_axi_awready, s_axi_wready, s_axi_bvalid, s_axi_arready, s_axi_rvalid;
  logic [1:0] s_axi_bresp, s_axi_rresp;
  logic [31:0] s_axi_rdata;
  logic done;
  int checks = 0, failures = 0;
  longint run_cycles = 0;

  always #5 clk = ~clk;

  aes_rv_top dut (.clk, .rst_n,
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready, .s_axi_wdata, .s_axi_wstrb, .s_axi_wvalid,
    .s_axi_wready, .s_axi_bresp, .s_axi_bvalid, .s_axi_bready, .s_axi_araddr, .s_axi_arvalid,
    .s_axi_arready, .s_axi_rdata, .s_axi_rresp, .s_axi_rvalid, .s_axi_rready, .done);

  `include "axi_lite_host.svh"

  always_ff @(posedge clk) if (dut.run) run_cycles <= run_cycles + 1;

  initial begin
    repeat (200_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one job per half
  int          j_n [2], j_ks [2], j_mode [2];
  blk_t        j_exp [2][61];
  blk_t        j_expv [2];
  logic [255:0] key;
  blk_t        v_stream;

  function automatic int dm(int half, int w);
    return 32'h10000 / 4 + half * 4096 + w;
  endfunction

  task automatic wr(int word, logic [31:0] d);
    logic [1:0] resp;
    axi_write(18'(word * 4), d, 4'hf, resp);
    if (resp != 2'b00) begin failures++; $display("FAIL write response"); end
  endtask

  task automatic rd(int word, output logic [31:0] d);
    logic [1:0] resp;
    axi_read(18'(word * 4), d, resp);
    if (resp != 2'b00) begin failures++; $display("FAIL read response"); end
  endtask

  // Write a job into half h. chain=1: keep the stream key, IV written later.
  task automatic put_job(int h, int ks, int mode, int n, bit chain);
    blk_t v, p;
    j_n[h] = n; j_ks[h] = ks; j_mode[h] = mode;
    wr(dm(h, 2), 32'((RT0 + RTS * (mode * 3 + ks)) * 4));
    wr(dm(h, 3), 32'(n));
    if (!chain) begin
      for (int i = 0; i < 8; i++) key[255-32*i -: 32] = $urandom;
      v = rand_blk();
    end else v = v_stream;
    for (int i = 0; i < 8; i++) wr(dm(h, BASE + i), key[255-32*i -: 32]);
    if (!chain) for (int k = 0; k < 4; k++) wr(dm(h, BASE + 8 + k), v[127-32*k -: 32]);
    for (int b = 0; b < n; b++) begin
      p = rand_blk();
      for (int k = 0; k < 4; k++) wr(dm(h, BASE + 12 + 4*b + k), p[127-32*k -: 32]);
      j_exp[h][b] = mode_step(mode, key, ks, v, p);
    end
    j_expv[h] = v;
    if (chain) v_stream = v;
  endtask

  task automatic check_job(int h);
    logic [31:0] d;
    for (int b = 0; b < j_n[h]; b++)
      for (int k = 0; k < 4; k++) begin
        rd(dm(h, BASE + 12 + 4*b + k), d);
        checks++;
        if (d !== j_exp[h][b][127-32*k -: 32]) begin
          failures++;
          if (failures < 10) $display("FAIL half %0d block %0d word %0d", h, b, k);
        end
      end
    for (int k = 0; k < 4; k++) begin
      rd(dm(h, BASE + 8 + k), d);
      checks++;
      if (d !== j_expv[h][127-32*k -: 32]) failures++;
    end
  endtask

  task automatic run_and_wait(int h);
    logic [31:0] st;
    logic [1:0] resp;
    axi_write(18'h20000, {30'b0, 1'(h), 1'b1}, 4'hf, resp);
  endtask

  task automatic wait_done();
    logic [31:0] st;
    logic [1:0] resp;
    do axi_read(18'h20004, st, resp); while (!st[0]);
  endtask

  // copy the chaining value the core wrote into half 'from' to the IV of 'to'
  task automatic pass_iv(int from, int to);
    logic [31:0] d;
    for (int k = 0; k < 4; k++) begin
      rd(dm(from, BASE + 8 + k), d);
      wr(dm(to, BASE + 8 + k), d);
    end
  endtask

  // Runs njobs jobs; job i has size size_of(i, total) etc.
  task automatic stream(int total, int per_job, bit chain, int mode_fixed, int ks_fixed,
                        output longint cyc);
    int njobs = (total + per_job - 1) / per_job;
    longint c0 = run_cycles;
    int h = 0;
    put_job(0, ks_fixed < 0 ? 0 : ks_fixed, mode_fixed, (total < per_job) ? total : per_job, chain);
    for (int j = 0; j < njobs; j++) begin
      h = j % 2;
      run_and_wait(h);
      if (j > 0) check_job(1 - h);
      if (j + 1 < njobs) begin
        int left = total - (j + 1) * per_job;
        put_job(1 - h, ks_fixed < 0 ? (j + 1) % 3 : ks_fixed, mode_fixed,
                left < per_job ? left : per_job, chain);
      end
      wait_done();
      if (chain && j + 1 < njobs) pass_iv(h, 1 - h);
    end
    check_job(h);
    cyc = run_cycles - c0;
  endtask

  initial begin
    longint cyc;
    int w;
    string mname [4] = '{"ECB", "CFB", "CBC", "CTR"};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // dispatcher: jump to the routine named in word 2 of the active half
    wr(0, lw(6, 0, 8));
    wr(1, jalr(0, 6, 0));
    for (int m = 0; m < 4; m++)
      for (int k = 0; k < 3; k++) begin
        w = RT0 + RTS * (m * 3 + k);
        wr(w + 0, lw(5, 0, 12));             // n blocks
        wr(w + 1, slli(6, 5, 2));            // 4n
        wr(w + 2, addi(20, 6, 12));          // amount: key + IV + data
        wr(w + 3, addi(8, 0, BASE));
        wr(w + 4, buf_latch(8, 20));
        wr(w + 5, buf_load());
        wr(w + 6, aes(k, m, 5));
        wr(w + 7, addi(8, 0, BASE + 8));
        wr(w + 8, lui(21, 32'h80));          // first buffer 8
        wr(w + 9, addi(20, 6, 4));
        wr(w + 10, add(20, 20, 21));
        wr(w + 11, buf_latch(8, 20));
        wr(w + 12, buf_store());             // IV and ciphertext back
        wr(w + 13, ecall());
      end

    // Part 1: 8192-block AES-128-CBC stream
    for (int i = 0; i < 8; i++) key[255-32*i -: 32] = $urandom;
    v_stream = rand_blk();
    for (int k = 0; k < 4; k++) wr(dm(0, BASE + 8 + k), v_stream[127-32*k -: 32]);
    stream(STREAM, 32, 1'b1, 2, 0, cyc);
    $display("CBC-128 stream: %0d blocks, core busy %0d cycles, %0.1f cycles/block, %0.2f Mbps at 241 MHz, %0.2f ms at 200 MHz",
             STREAM, cyc, real'(cyc) / STREAM, 241.0 * 128.0 * STREAM / real'(cyc),
             real'(cyc) / 200.0e3);

    // Part 2: 100,000 random blocks per mode
    for (int m = 0; m < 4; m++) begin
      stream(PERMODE, 61, 1'b0, m, -1, cyc);
      $display("%s: %0d blocks, %0.1f core cycles/block, %0.2f Mbps at 241 MHz",
               mname[m], PERMODE, real'(cyc) / PERMODE, 241.0 * 128.0 * PERMODE / real'(cyc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
