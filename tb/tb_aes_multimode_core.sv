// Testbench for aes_multimode_core: random keys and blocks of all sizes,
// first with key expansion (rekey) and then reusing the expanded key for a
// second block. Compares with reference encryption and checks latencies:
// 4*Nr+1 without rekey, plus 4*(Nr+1)-Nk+1 for the expansion.
module tb_aes_multimode_core;
  import aesrv_pkg::*;
  import aes_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, rekey = 1'b0;
  aes_keysize_e ks = KEY_128;
  logic [255:0] key = '0;
  aes_block_t bin = '0, bout;
  logic busy, done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  aes_multimode_core dut (.clk, .rst_n, .start, .rekey, .key_size(ks), .key,
                          .block_in(bin), .block_out(bout), .busy, .done);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int k, logic rk, aes_block_t p);
    int cyc, exp_cyc;
    bin = p; ks = aes_keysize_e'(k);
    @(negedge clk) begin start = 1'b1; rekey = rk; end
    @(negedge clk) start = 1'b0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    exp_cyc = 4*nr_of(k) + 1 + (rk ? 4*(nr_of(k)+1) - nk_of(k) + 1 : 0);
    checks += 2;
    if (cyc != exp_cyc) begin failures++; $display("FAIL latency %0d vs %0d", cyc, exp_cyc); end
    if (bout !== encrypt(key, k, p)) begin failures++; $display("FAIL ks=%0d data", k); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 3; k++)
      for (int n = 0; n < 3; n++) begin
        key = {rand_blk(), rand_blk()};
        run(k, 1'b1, rand_blk());
        run(k, 1'b0, rand_blk());
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
