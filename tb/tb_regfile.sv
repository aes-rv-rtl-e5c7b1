// Testbench for regfile: random writes and reads against a model; x0 must
// stay zero and a same-cycle read of the written register returns new data.
module tb_regfile;
  logic clk = 1'b0, rst_n = 1'b0, we = 1'b0;
  logic [4:0] rs1 = '0, rs2 = '0, rd = '0;
  logic [31:0] d1, d2, wd = '0;
  logic [31:0] model [32];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  regfile dut (.clk, .rst_n, .rs1_addr(rs1), .rs2_addr(rs2), .rs1_data(d1), .rs2_data(d2),
               .we, .rd_addr(rd), .rd_data(wd));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] expect_rd(logic [4:0] a);
    if (a == 0) return '0;
    if (we && rd == a) return wd;
    return model[a];
  endfunction

  initial begin
    for (int i = 0; i < 32; i++) model[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      we = $urandom % 2; rd = 5'($urandom); wd = $urandom;
      rs1 = 5'($urandom); rs2 = (t % 7 == 0) ? rd : 5'($urandom);
      #1;
      checks += 2;
      if (d1 !== expect_rd(rs1)) begin failures++; $display("FAIL rs1 x%0d", rs1); end
      if (d2 !== expect_rd(rs2)) begin failures++; $display("FAIL rs2 x%0d", rs2); end
      @(posedge clk);
      if (we && rd != 0) model[rd] = wd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
