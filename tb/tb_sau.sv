// Testbench for sau (specialized AES unit). The testbench owns the 256-word
// buffer array, applies the unit's block writes, and checks for each mode
// and key size that every result block and the written-back chaining value
// match the reference model. A second call on the same buffers checks that
// CBC/CFB/CTR chains continue across calls. The start-to-done time must be
// L1 + 3 + (n-1)*(4*Nr+3) cycles, L1 being the core's latency with key
// expansion.
module tb_sau;
  import aesrv_pkg::*;
  import aes_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  aes_mode_e mode = MODE_ECB;
  aes_keysize_e ks = KEY_128;
  logic [7:0] nblk = '0;
  logic [31:0] bufs [256];
  logic blk_we, busy, done;
  logic [7:0] blk_idx;
  logic [127:0] blk_wdata;
  int checks = 0, failures = 0;
  int modes_seen [4];

  always #5 clk = ~clk;

  sau dut (.clk, .rst_n, .start, .mode, .key_size(ks), .num_blocks(nblk), .bufs,
           .blk_we, .blk_idx, .blk_wdata, .busy, .done);

  always_ff @(posedge clk)
    if (blk_we) for (int k = 0; k < 4; k++) bufs[8'(blk_idx + 8'(k))] <= blk_wdata[127-32*k -: 32];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic blk_t get_blk(int base);
    return {bufs[base], bufs[base+1], bufs[base+2], bufs[base+3]};
  endfunction

  task automatic run(int m, int k, int n, logic fresh);
    logic [255:0] key;
    blk_t v, p [64], c;
    int cyc, l1, exp_cyc;
    if (fresh) begin
      for (int i = 0; i < 256; i++) bufs[i] = $urandom;
    end
    for (int i = 0; i < 8; i++) key[255-32*i -: 32] = bufs[i];
    v = get_blk(8);
    for (int b = 0; b < n; b++) p[b] = get_blk(12 + 4*b);
    mode = aes_mode_e'(m); ks = aes_keysize_e'(k); nblk = 8'(n);
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    @(negedge clk);
    for (int b = 0; b < n; b++) begin
      c = mode_step(m, key, k, v, p[b]);
      checks++;
      if (get_blk(12 + 4*b) !== c) begin failures++; $display("FAIL mode %0d ks %0d block %0d", m, k, b); end
    end
    checks++;
    if (m != 0 && get_blk(8) !== v) begin failures++; $display("FAIL mode %0d chaining value", m); end
    l1 = (4*nr_of(k) + 1) + (4*(nr_of(k)+1) - nk_of(k) + 1);
    exp_cyc = l1 + 3 + (n-1)*(4*nr_of(k) + 3);
    checks++;
    if (cyc != exp_cyc) begin failures++; $display("FAIL latency %0d vs %0d", cyc, exp_cyc); end
    modes_seen[m]++;
  endtask

  initial begin
    for (int i = 0; i < 256; i++) bufs[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int m = 0; m < 4; m++)
      for (int k = 0; k < 3; k++) begin
        run(m, k, 4, 1'b1);     // four consecutive blocks, as in the paper's cycle counts
        run(m, k, 2, 1'b0);     // continue the chain
      end
    run(2, 0, 61, 1'b1);        // largest run that fits the buffers
    for (int m = 0; m < 4; m++) begin
      checks++;
      if (modes_seen[m] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
