// AXI4-Lite host tasks shared by the testbenches that drive the accelerator
// bus. Expects in the including module: clk and the s_axi_* signals as
// variables, driven at negedges.
task automatic axi_write(input logic [17:0] addr, input logic [31:0] data,
                         input logic [3:0] strb, output logic [1:0] resp);
  @(negedge clk);
  s_axi_awaddr = addr; s_axi_awvalid = 1'b1;
  s_axi_wdata  = data; s_axi_wstrb = strb; s_axi_wvalid = 1'b1;
  s_axi_bready = 1'b1;
  do @(posedge clk); while (!(s_axi_awready && s_axi_wready));
  @(negedge clk);
  s_axi_awvalid = 1'b0; s_axi_wvalid = 1'b0;
  while (!s_axi_bvalid) @(negedge clk);
  resp = s_axi_bresp;
  @(posedge clk);
  @(negedge clk) s_axi_bready = 1'b0;
endtask

task automatic axi_read(input logic [17:0] addr, output logic [31:0] data, output logic [1:0] resp);
  @(negedge clk);
  s_axi_araddr = addr; s_axi_arvalid = 1'b1; s_axi_rready = 1'b1;
  do @(posedge clk); while (!s_axi_arready);
  @(negedge clk) s_axi_arvalid = 1'b0;
  while (!s_axi_rvalid) @(negedge clk);
  data = s_axi_rdata; resp = s_axi_rresp;
  @(posedge clk);
  @(negedge clk) s_axi_rready = 1'b0;
endtask
