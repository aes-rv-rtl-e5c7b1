// Testbench for buffer_set: random word writes, 128-bit block writes and
// reads, compared with a scoreboard array; checks that the whole contents
// appear on the parallel output and that the block port wins a collision.
module tb_buffer_set;
  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_en = 1'b0, blk_we = 1'b0;
  logic [7:0] wr_idx = '0, blk_idx = '0, rd_idx = '0;
  logic [31:0] wr_data = '0, rd_data;
  logic [127:0] blk_wdata = '0;
  logic [31:0] bufs [256];
  logic [31:0] model [256];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  buffer_set dut (.clk, .rst_n, .wr_en, .wr_idx, .wr_data, .blk_we, .blk_idx, .blk_wdata,
                  .rd_idx, .rd_data, .bufs);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 256; i++) model[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      wr_en = ($urandom % 2) == 0; wr_idx = 8'($urandom); wr_data = $urandom;
      blk_we = ($urandom % 3) == 0; blk_idx = 8'($urandom); blk_wdata = {$urandom, $urandom, $urandom, $urandom};
      if (t % 50 == 0) begin blk_we = 1'b1; wr_en = 1'b1; wr_idx = blk_idx + 8'd2; end   // collision
      rd_idx = 8'($urandom);
      #1;
      checks++;
      if (rd_data !== model[rd_idx]) begin failures++; $display("FAIL read %0d", rd_idx); end
      @(posedge clk);
      if (wr_en) model[wr_idx] = wr_data;
      if (blk_we) for (int k = 0; k < 4; k++) model[8'(blk_idx + 8'(k))] = blk_wdata[127-32*k -: 32];
    end
    @(negedge clk); wr_en = 1'b0; blk_we = 1'b0;
    @(negedge clk);
    for (int i = 0; i < 256; i++) begin
      checks++;
      if (bufs[i] !== model[i]) begin failures++; $display("FAIL bufs[%0d]", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
