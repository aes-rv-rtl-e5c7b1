// Testbench for aes_core_controller: the key expansion and cipher parts are
// replaced by responders that answer after fixed delays. Checks NumRound for
// each key size, that the key expansion runs only with rekey, that the
// cipher starts only after it, and the resulting start-to-done time.
module tb_aes_core_controller;
  import aesrv_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, rekey = 1'b0;
  aes_keysize_e ks = KEY_128;
  logic [3:0] nr;
  logic ke_start, ke_done, ci_start, ci_done, busy, done;
  int checks = 0, failures = 0;
  int ke_starts = 0, ci_starts = 0;
  int ke_cnt = -1, ci_cnt = -1;

  always #5 clk = ~clk;

  aes_core_controller dut (.clk, .rst_n, .start, .rekey, .key_size(ks), .num_rounds(nr),
                           .ke_start, .ke_done, .ci_start, .ci_done, .busy, .done);

  // responders: done 5 (key expansion) and 7 (cipher) cycles after start
  always_ff @(posedge clk) begin
    if (ke_start) begin ke_cnt <= 5; ke_starts <= ke_starts + 1; end
    else if (ke_cnt >= 0) ke_cnt <= ke_cnt - 1;
    if (ci_start) begin
      ci_cnt <= 7; ci_starts <= ci_starts + 1;
      if (ke_cnt >= 0) begin failures++; $display("FAIL cipher started during key expansion"); end
    end else if (ci_cnt >= 0) ci_cnt <= ci_cnt - 1;
  end
  assign ke_done = (ke_cnt == 0);
  assign ci_done = (ci_cnt == 0);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int k, logic rk, int exp_cyc);
    int cyc, ke0, ci0;
    ke0 = ke_starts; ci0 = ci_starts;
    @(negedge clk) begin start = 1'b1; rekey = rk; ks = aes_keysize_e'(k); end
    @(negedge clk) begin start = 1'b0; ks = KEY_128; end
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    checks += 4;
    if (nr != 4'(10 + 2*k)) begin failures++; $display("FAIL nr=%0d for ks %0d", nr, k); end
    if (ke_starts - ke0 != (rk ? 1 : 0)) begin failures++; $display("FAIL key expansion count"); end
    if (ci_starts - ci0 != 1) begin failures++; $display("FAIL cipher count"); end
    if (cyc != exp_cyc) begin failures++; $display("FAIL latency %0d vs %0d", cyc, exp_cyc); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 3; k++) begin
      run(k, 1'b1, 15);
      run(k, 1'b0, 9);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
