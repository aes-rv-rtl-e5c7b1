// aes_rv_top: the AES-RV accelerator as seen from the host: an AXI4-Lite
// slave in front of a five-stage RISC-V core with AES instruction extension.
//
// Blocks and connections:
//   axi_manager      host bus -> instruction memory writes, data memory
//                    port B, start pulse and half select; done/running back
//   instr_mem        4096 x 32 program store, read by the core's fetch stage
//   data_mem         8192 x 32, port A core, port B host; used as two halves
//   state_controller start/done handshake, restarts the core, latches the
//                    half the run works on
//   aesrv_core       pipeline with register file, ALU, controllers, the
//                    256 x 32 buffer set, buffer access unit and the
//                    specialized AES unit
//
// Host usage (ping-pong): write the program once; write key/IV/data into the
// first half and start with half=0; while that runs, write the next input
// into the last half; when STATUS.done is seen, start the last half and read
// the first half's results while it runs, and so on. The host processor
// itself (CPU, DDR, DMA engine) is not part of this design; its AXI slave
// signals are the ports below.
module aes_rv_top
  import aesrv_pkg::*;
#(
  parameter int unsigned IM_AW   = 12,
  parameter int unsigned DM_AW   = 13,
  parameter int unsigned NUM_BUF = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [17:0] s_axi_awaddr,
  input  logic        s_axi_awvalid,
  output logic        s_axi_awready,
  input  logic [31:0] s_axi_wdata,
  input  logic [3:0]  s_axi_wstrb,
  input  logic        s_axi_wvalid,
  output logic        s_axi_wready,
  output logic [1:0]  s_axi_bresp,
  output logic        s_axi_bvalid,
  input  logic        s_axi_bready,
  input  logic [17:0] s_axi_araddr,
  input  logic        s_axi_arvalid,
  output logic        s_axi_arready,
  output logic [31:0] s_axi_rdata,
  output logic [1:0]  s_axi_rresp,
  output logic        s_axi_rvalid,
  input  logic        s_axi_rready,
  output logic        done
);

  logic             im_we, im_re;
  logic [IM_AW-1:0] im_waddr, im_raddr;
  logic [31:0]      im_wdata, im_rdata;

  logic             a_en, b_en;
  logic [3:0]       a_we, b_we;
  logic [DM_AW-1:0] a_addr, b_addr;
  logic [31:0]      a_wdata, a_rdata, b_wdata, b_rdata;

  logic start, bank_req, bank, clear, run, halt;

  axi_manager #(.IM_AW(IM_AW), .DM_AW(DM_AW)) u_axi (
    .clk, .rst_n,
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready,
    .s_axi_wdata, .s_axi_wstrb, .s_axi_wvalid, .s_axi_wready,
    .s_axi_bresp, .s_axi_bvalid, .s_axi_bready,
    .s_axi_araddr, .s_axi_arvalid, .s_axi_arready,
    .s_axi_rdata, .s_axi_rresp, .s_axi_rvalid, .s_axi_rready,
    .im_we, .im_waddr, .im_wdata,
    .dm_en(b_en), .dm_we(b_we), .dm_addr(b_addr), .dm_wdata(b_wdata), .dm_rdata(b_rdata),
    .start, .bank(bank_req), .done, .running(run)
  );

  instr_mem #(.AW(IM_AW)) u_im (
    .clk, .we(im_we), .waddr(im_waddr), .wdata(im_wdata),
    .re(im_re), .raddr(im_raddr), .rdata(im_rdata)
  );

  data_mem #(.AW(DM_AW)) u_dm (
    .clk,
    .a_en, .a_we, .a_addr, .a_wdata, .a_rdata,
    .b_en, .b_we, .b_addr, .b_wdata, .b_rdata
  );

  state_controller u_state (
    .clk, .rst_n, .start, .bank_in(bank_req), .halt,
    .clear, .run, .done, .bank
  );

  aesrv_core #(.IM_AW(IM_AW), .DM_AW(DM_AW), .NUM_BUF(NUM_BUF)) u_core (
    .clk, .rst_n, .clear, .run, .bank,
    .im_re, .im_addr(im_raddr), .im_rdata,
    .dm_en(a_en), .dm_we(a_we), .dm_addr(a_addr), .dm_wdata(a_wdata), .dm_rdata(a_rdata),
    .halt
  );

endmodule
