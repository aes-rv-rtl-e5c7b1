// Testbench for data_mem: random byte-enabled writes and reads on both
// ports at once (different halves, as the ping-pong schedule uses them),
// compared with a model; reads return the old word (read-before-write).
module tb_data_mem;
  logic clk = 1'b0;
  logic a_en = 1'b0, b_en = 1'b0;
  logic [3:0] a_we = '0, b_we = '0;
  logic [12:0] a_addr = '0, b_addr = '0;
  logic [31:0] a_wdata = '0, b_wdata = '0, a_rdata, b_rdata;
  logic [31:0] model [8192];
  logic [31:0] ea, eb;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  data_mem dut (.clk, .a_en, .a_we, .a_addr, .a_wdata, .a_rdata,
                .b_en, .b_we, .b_addr, .b_wdata, .b_rdata);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] merge(logic [31:0] old, logic [31:0] nw, logic [3:0] be);
    for (int i = 0; i < 4; i++) if (be[i]) old[8*i +: 8] = nw[8*i +: 8];
    return old;
  endfunction

  initial begin
    // fill through both ports
    for (int i = 0; i < 4096; i++) begin
      @(negedge clk) begin
        a_en = 1'b1; a_we = 4'hf; a_addr = 13'(i);        a_wdata = $urandom; model[i] = a_wdata;
        b_en = 1'b1; b_we = 4'hf; b_addr = 13'(i + 4096); b_wdata = $urandom; model[i+4096] = b_wdata;
      end
    end
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk) begin
        logic h;
        h = t[0];
        a_en = 1'b1; a_we = 4'($urandom); a_addr = {h, 12'($urandom)};  a_wdata = $urandom;
        b_en = 1'b1; b_we = 4'($urandom); b_addr = {~h, 12'($urandom)}; b_wdata = $urandom;
        ea = model[a_addr]; eb = model[b_addr];
      end
      @(posedge clk);
      model[a_addr] = merge(model[a_addr], a_wdata, a_we);
      model[b_addr] = merge(model[b_addr], b_wdata, b_we);
      #1;
      checks += 2;
      if (a_rdata !== ea) begin failures++; $display("FAIL port A read"); end
      if (b_rdata !== eb) begin failures++; $display("FAIL port B read"); end
    end
    @(negedge clk) begin a_en = 1'b0; b_en = 1'b0; end
    for (int i = 0; i < 8192; i += 37) begin
      @(negedge clk) begin a_en = 1'b1; a_we = '0; a_addr = 13'(i); end
      @(negedge clk) a_en = 1'b0;
      checks++;
      if (a_rdata !== model[i]) begin failures++; $display("FAIL final word %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
