// Testbench for aes_cipher: round keys come from the reference schedule;
// random blocks for all key sizes are compared with reference encryption,
// and done must come 4*Nr-1 cycles after start (39 / 47 / 55).
module tb_aes_cipher;
  import aesrv_pkg::*;
  import aes_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [3:0] nr;
  round_keys_t rk;
  aes_block_t bin, bout;
  logic busy, done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  aes_cipher dut (.clk, .rst_n, .start, .num_rounds(nr), .round_keys(rk),
                  .block_in(bin), .block_out(bout), .busy, .done);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int k, logic [255:0] kv, aes_block_t p);
    int cyc;
    nr = 4'(nr_of(k));
    for (int r = 0; r < 15; r++) rk[r] = (r <= nr_of(k)) ? round_key(kv, k, r) : '0;
    bin = p;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    checks += 2;
    if (cyc != 4*nr_of(k) - 1) begin failures++; $display("FAIL latency %0d", cyc); end
    if (bout !== encrypt(kv, k, p)) begin
      failures++; $display("FAIL ks=%0d %h vs %h", k, bout, encrypt(kv, k, p));
    end
  endtask

  initial begin
    for (int r = 0; r < 15; r++) rk[r] = '0;
    nr = 4'd10; bin = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(0, {128'h000102030405060708090a0b0c0d0e0f, 128'h0}, 128'h00112233445566778899aabbccddeeff);
    checks++;
    if (bout !== 128'h69c4e0d86a7b0430d8cdb78070b4c55a) failures++;
    for (int k = 0; k < 3; k++)
      for (int n = 0; n < 5; n++) run(k, {rand_blk(), rand_blk()}, rand_blk());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
