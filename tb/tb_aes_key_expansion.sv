// Testbench for aes_key_expansion: random and standard keys of all three
// sizes; every round key is compared with the reference schedule, and the
// start-to-done time must be 4*(Nr+1)-Nk cycles (40 / 46 / 52).
module tb_aes_key_expansion;
  import aesrv_pkg::*;
  import aes_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  aes_keysize_e ks;
  logic [255:0] key;
  round_keys_t rk;
  logic busy, done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  aes_key_expansion dut (.clk, .rst_n, .start, .key_size(ks), .key, .round_keys(rk), .busy, .done);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int k, logic [255:0] kv);
    int cyc = 0;
    ks = aes_keysize_e'(k); key = kv;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 4*(nr_of(k)+1) - nk_of(k)) begin
      failures++; $display("FAIL latency ks=%0d got %0d", k, cyc);
    end
    @(negedge clk);
    for (int r = 0; r <= nr_of(k); r++) begin
      checks++;
      if (rk[r] !== round_key(kv, k, r)) begin
        failures++; $display("FAIL ks=%0d round key %0d: %h vs %h", k, r, rk[r], round_key(kv, k, r));
      end
    end
  endtask

  initial begin
    checks++;
    if (kat_failures() != 0) failures++;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(0, {128'h2b7e151628aed2a6abf7158809cf4f3c, 128'h0});
    checks++;
    if (rk[10] !== 128'hd014f9a8c9ee2589e13f0cc8b6630ca6) failures++;   // FIPS-197 A.1
    for (int k = 0; k < 3; k++)
      for (int n = 0; n < 4; n++) run(k, {rand_blk(), rand_blk()});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
