// Testbench for axi_manager: AXI4-Lite writes to instruction memory, data
// memory (with byte strobes) and the control register; reads from data
// memory, control and status; error responses for unmapped addresses.
// Instruction and data memory are models attached to the decoded ports.
module tb_axi_manager;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [17:0] s_axi_awaddr = '0, s_axi_araddr = '0;
  logic s_axi_awvalid = 1'b0, s_axi_wvalid = 1'b0, s_axi_bready = 1'b0;
  logic s_axi_arvalid = 1'b0, s_axi_rready = 1'b0;
  logic [31:0] s_axi_wdata = '0;
  logic [3:0] s_axi_wstrb = '0;
  logic s_axi_awready, s_axi_wready, s_axi_bvalid, s_axi_arready, s_axi_rvalid;
  logic [1:0] s_axi_bresp, s_axi_rresp;
  logic [31:0] s_axi_rdata;
  logic im_we, dm_en, start, bank, done = 1'b0, running = 1'b0;
  logic [11:0] im_waddr;
  logic [31:0] im_wdata, dm_wdata, dm_rdata;
  logic [3:0] dm_we;
  logic [12:0] dm_addr;
  logic [31:0] im [4096];
  logic [31:0] dm [8192];
  int checks = 0, failures = 0, starts = 0;

  always #5 clk = ~clk;

  axi_manager dut (.clk, .rst_n,
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready, .s_axi_wdata, .s_axi_wstrb, .s_axi_wvalid,
    .s_axi_wready, .s_axi_bresp, .s_axi_bvalid, .s_axi_bready, .s_axi_araddr, .s_axi_arvalid,
    .s_axi_arready, .s_axi_rdata, .s_axi_rresp, .s_axi_rvalid, .s_axi_rready,
    .im_we, .im_waddr, .im_wdata, .dm_en, .dm_we, .dm_addr, .dm_wdata, .dm_rdata,
    .start, .bank, .done, .running);

  always_ff @(posedge clk) begin
    if (im_we) im[im_waddr] <= im_wdata;
    if (dm_en) begin
      for (int i = 0; i < 4; i++) if (dm_we[i]) dm[dm_addr][8*i +: 8] <= dm_wdata[8*i +: 8];
      dm_rdata <= dm[dm_addr];
    end
    if (start) starts <= starts + 1;
  end

  `include "axi_lite_host.svh"

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_true(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    logic [1:0] resp;
    logic [31:0] d, w;
    int a;
    for (int i = 0; i < 8192; i++) dm[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 50; t++) begin
      a = $urandom % 4096; w = $urandom;
      axi_write(18'(a * 4), w, 4'hf, resp);
      expect_true(resp == 2'b00 && im[a] == w, "IM write");
    end
    for (int t = 0; t < 100; t++) begin
      logic [3:0] s;
      a = $urandom % 8192; w = $urandom; s = (t % 3 == 0) ? 4'($urandom) : 4'hf;
      d = dm[a];
      for (int i = 0; i < 4; i++) if (s[i]) d[8*i +: 8] = w[8*i +: 8];
      axi_write(18'h10000 + 18'(a * 4), w, s, resp);
      expect_true(resp == 2'b00 && dm[a] == d, "DM write with strobes");
      axi_read(18'h10000 + 18'(a * 4), w, resp);
      expect_true(resp == 2'b00 && w == d, "DM read back");
    end
    axi_write(18'h20000, 32'h3, 4'hf, resp);
    expect_true(resp == 2'b00 && starts == 1 && bank == 1'b1, "start with last half");
    axi_read(18'h20000, d, resp);
    expect_true(d == 32'h2, "control read");
    axi_write(18'h20000, 32'h0, 4'hf, resp);
    expect_true(starts == 1 && bank == 1'b0, "half select without start");
    done = 1'b1; running = 1'b0;
    axi_read(18'h20004, d, resp);
    expect_true(d == 32'h1 && resp == 2'b00, "status done");
    done = 1'b0; running = 1'b1;
    axi_read(18'h20004, d, resp);
    expect_true(d == 32'h2, "status running");
    axi_write(18'h30000, 32'h5, 4'hf, resp);
    expect_true(resp == 2'b10, "unmapped write -> SLVERR");
    axi_read(18'h20010, d, resp);
    expect_true(resp == 2'b10, "unmapped read -> SLVERR");
    axi_write(18'h20004, 32'h1, 4'hf, resp);
    expect_true(resp == 2'b10 && starts == 1, "status is read only");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
