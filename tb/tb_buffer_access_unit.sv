// Testbench for buffer_access_unit. A data memory model with one cycle of
// read latency and a buffer array are attached. Latches random base
// addresses, amounts (1..256) and buffer start indices, then checks loads
// (DM -> buffers) and stores (buffers -> DM) word by word, and that busy
// lasts amount+1 cycles for a load and amount cycles for a store.
module tb_buffer_access_unit;
  logic clk = 1'b0, rst_n = 1'b0;
  logic latch = 1'b0, go_load = 1'b0, go_store = 1'b0;
  logic [31:0] base_addr = '0, amount = '0;
  logic dm_en, buf_we, busy;
  logic [3:0] dm_we;
  logic [12:0] dm_addr;
  logic [31:0] dm_wdata, dm_rdata, buf_wdata, buf_rdata;
  logic [7:0] buf_widx, buf_ridx;
  logic [31:0] dm [8192];
  logic [31:0] bufs [256];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  buffer_access_unit dut (.clk, .rst_n, .latch, .base_addr, .amount, .go_load, .go_store,
    .dm_en, .dm_we, .dm_addr, .dm_wdata, .dm_rdata,
    .buf_we, .buf_widx, .buf_wdata, .buf_ridx, .buf_rdata, .busy);

  always_ff @(posedge clk) begin
    if (dm_en) begin
      if (dm_we == 4'hf) dm[dm_addr] <= dm_wdata;
      dm_rdata <= dm[dm_addr];
    end
    if (buf_we) bufs[buf_widx] <= buf_wdata;
  end
  assign buf_rdata = bufs[buf_ridx];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic xfer(logic store);
    int base, n, bs, cyc;
    logic [31:0] dm_copy [8192];
    logic [31:0] buf_copy [256];
    base = $urandom % 7000; n = 1 + $urandom % 256; bs = $urandom % 256;
    if ($urandom % 8 == 0) n = 256;
    dm_copy = dm; buf_copy = bufs;
    @(negedge clk) begin latch = 1'b1; base_addr = base; amount = {8'h0, 8'(bs), 7'h0, 9'(n % 256)}; end
    @(negedge clk) begin latch = 1'b0; if (store) go_store = 1'b1; else go_load = 1'b1; end
    @(negedge clk) begin go_store = 1'b0; go_load = 1'b0; end
    cyc = 0;
    while (busy) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != (store ? n : n + 1)) begin failures++; $display("FAIL busy %0d for %0d words", cyc, n); end
    for (int i = 0; i < n; i++) begin
      checks++;
      if (store) begin
        if (dm[base+i] !== buf_copy[8'(bs+i)]) begin failures++; $display("FAIL store word %0d", i); end
      end else begin
        if (bufs[8'(bs+i)] !== dm_copy[base+i]) begin failures++; $display("FAIL load word %0d", i); end
      end
    end
    checks++;
    if (store ? (dm[base+n] !== dm_copy[base+n]) : (bs+n < 256 && bufs[bs+n] !== buf_copy[bs+n])) begin
      failures++; $display("FAIL word past the end was written");
    end
  endtask

  initial begin
    for (int i = 0; i < 8192; i++) dm[i] = $urandom;
    for (int i = 0; i < 256; i++) bufs[i] = $urandom;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 40; t++) xfer(t % 2 == 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
