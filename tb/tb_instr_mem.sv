// Testbench for instr_mem: writes random words, reads them back with the
// one-cycle registered read, and checks that rdata holds while re=0.
module tb_instr_mem;
  logic clk = 1'b0, we = 1'b0, re = 1'b0;
  logic [11:0] waddr = '0, raddr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [31:0] model [4096];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  instr_mem dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4096; i++) begin
      @(negedge clk) begin we = 1'b1; waddr = 12'(i); wdata = $urandom; model[i] = wdata; end
    end
    @(negedge clk) we = 1'b0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk) begin re = 1'b1; raddr = 12'($urandom); end
      @(negedge clk) re = 1'b0;
      checks++;
      if (rdata !== model[raddr]) begin failures++; $display("FAIL read %0d", raddr); end
      raddr = raddr + 12'd1;
      @(negedge clk);
      checks++;
      if (rdata !== model[raddr - 12'd1]) begin failures++; $display("FAIL hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
