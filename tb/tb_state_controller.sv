// Testbench for state_controller: start/halt/restart sequences; checks the
// clear pulse, run, done and the latched data-memory half.
module tb_state_controller;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, bank_in = 1'b0, halt = 1'b0;
  logic clear, run, done, bank;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  state_controller dut (.clk, .rst_n, .start, .bank_in, .halt, .clear, .run, .done, .bank);

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_true(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    expect_true(!run && !done && !clear, "idle after reset");
    for (int t = 0; t < 6; t++) begin
      @(negedge clk) begin start = 1'b1; bank_in = t[0]; end
      @(negedge clk) begin start = 1'b0; bank_in = ~t[0]; end
      expect_true(clear && !run && !done && bank == t[0], "clear pulse, half latched");
      @(negedge clk);
      expect_true(run && !clear && !done, "running");
      // a start while running is ignored
      start = 1'b1; @(negedge clk); start = 1'b0;
      expect_true(run && !clear && bank == t[0], "start ignored while running");
      repeat (3 + t) @(negedge clk);
      halt = 1'b1; @(negedge clk); halt = 1'b0;
      expect_true(done && !run, "done after halt");
      repeat (2) @(negedge clk);
      expect_true(done && !run, "done holds");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
