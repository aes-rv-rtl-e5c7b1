// axi_manager: the AXI4-Lite slave through which the host processing system
// loads the program, moves data and controls the accelerator.
//
// Address map (byte addresses, bits [17:16] select the region):
//   0x0_0000 - 0x0_3FFF  instruction memory (write only; reads return 0)
//   0x1_0000 - 0x1_7FFF  data memory, port B (read/write, byte strobes)
//   0x2_0000             CONTROL: write bit0=1 pulses start, bit1 selects
//                        the data-memory half for the run (0 first, 1 last);
//                        reads return {30'b0, half, 1'b0}
//   0x2_0004             STATUS (read only): bit0 done, bit1 running
// Anything else answers SLVERR. The paper says only that this block decodes
// host traffic into IM address/data, DM address/data, start and done; the
// AXI4-Lite protocol (single beats, so a DMA transfer is a stream of single
// writes) and the map are this design's.
//
// Handshake: a write is accepted in the cycle where AWVALID and WVALID are
// both high and no response is pending (AWREADY=WREADY=1 in that cycle);
// BVALID follows one cycle later. A read is accepted when no read is in
// flight; RVALID follows two cycles later (one cycle of data-memory latency).
module axi_manager #(
  parameter int unsigned IM_AW = 12,
  parameter int unsigned DM_AW = 13
) (
  input  logic             clk,
  input  logic             rst_n,
  // AXI4-Lite slave
  input  logic [17:0]      s_axi_awaddr,
  input  logic             s_axi_awvalid,
  output logic             s_axi_awready,
  input  logic [31:0]      s_axi_wdata,
  input  logic [3:0]       s_axi_wstrb,
  input  logic             s_axi_wvalid,
  output logic             s_axi_wready,
  output logic [1:0]       s_axi_bresp,
  output logic             s_axi_bvalid,
  input  logic             s_axi_bready,
  input  logic [17:0]      s_axi_araddr,
  input  logic             s_axi_arvalid,
  output logic             s_axi_arready,
  output logic [31:0]      s_axi_rdata,
  output logic [1:0]       s_axi_rresp,
  output logic             s_axi_rvalid,
  input  logic             s_axi_rready,
  // instruction memory write port
  output logic             im_we,
  output logic [IM_AW-1:0] im_waddr,
  output logic [31:0]      im_wdata,
  // data memory port B
  output logic             dm_en,
  output logic [3:0]       dm_we,
  output logic [DM_AW-1:0] dm_addr,
  output logic [31:0]      dm_wdata,
  input  logic [31:0]      dm_rdata,
  // control
  output logic             start,
  output logic             bank,
  input  logic             done,
  input  logic             running
);

  localparam logic [1:0] REG_IM = 2'd0, REG_DM = 2'd1, REG_CSR = 2'd2;
  localparam logic [1:0] RESP_OKAY = 2'b00, RESP_SLVERR = 2'b10;

  function automatic logic im_hit(logic [17:0] a);
    return a[17:16] == REG_IM && a[15:2] < 14'(2**IM_AW);
  endfunction
  function automatic logic dm_hit(logic [17:0] a);
    return a[17:16] == REG_DM && a[15:2] < 14'(2**DM_AW);
  endfunction
  function automatic logic csr_hit(logic [17:0] a);
    return a[17:16] == REG_CSR && a[15:3] == '0;
  endfunction

  // ---------------- write channel ----------------
  logic wr_fire, rd_fire;
  assign s_axi_awready = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;
  assign s_axi_wready  = s_axi_awready;
  assign wr_fire       = s_axi_awready;

  // ---------------- read channel ----------------
  logic       rd_pend_q;     // address accepted, data next cycle
  logic [1:0] rd_kind_q;     // 0 IM/none, 1 DM, 2 CSR
  logic       rd_err_q;
  logic       rd_addr2_q;

  assign s_axi_arready = !rd_pend_q && !s_axi_rvalid;
  assign rd_fire       = s_axi_arvalid && s_axi_arready;

  always_comb begin
    im_we    = wr_fire && im_hit(s_axi_awaddr);
    im_waddr = s_axi_awaddr[IM_AW+1:2];
    im_wdata = s_axi_wdata;
    dm_wdata = s_axi_wdata;
    if (wr_fire && dm_hit(s_axi_awaddr)) begin
      dm_en   = 1'b1;
      dm_we   = s_axi_wstrb;
      dm_addr = s_axi_awaddr[DM_AW+1:2];
    end else begin
      dm_en   = rd_fire && dm_hit(s_axi_araddr);
      dm_we   = 4'b0000;
      dm_addr = s_axi_araddr[DM_AW+1:2];
    end
  end

  // a DM read cannot share the port with a DM write in the same cycle
  logic rd_blocked;
  assign rd_blocked = wr_fire && dm_hit(s_axi_awaddr) && dm_hit(s_axi_araddr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axi_bvalid <= 1'b0;
      s_axi_bresp  <= RESP_OKAY;
      s_axi_rvalid <= 1'b0;
      s_axi_rresp  <= RESP_OKAY;
      s_axi_rdata  <= '0;
      rd_pend_q    <= 1'b0;
      rd_kind_q    <= '0;
      rd_err_q     <= 1'b0;
      rd_addr2_q   <= 1'b0;
      start        <= 1'b0;
      bank         <= 1'b0;
    end else begin
      start <= 1'b0;
      // write response
      if (s_axi_bvalid && s_axi_bready) s_axi_bvalid <= 1'b0;
      if (wr_fire) begin
        s_axi_bvalid <= 1'b1;
        s_axi_bresp  <= (im_hit(s_axi_awaddr) || dm_hit(s_axi_awaddr) ||
                         (csr_hit(s_axi_awaddr) && !s_axi_awaddr[2])) ? RESP_OKAY : RESP_SLVERR;
        if (csr_hit(s_axi_awaddr) && !s_axi_awaddr[2] && s_axi_wstrb[0]) begin
          bank  <= s_axi_wdata[1];
          start <= s_axi_wdata[0];
        end
      end
      // read
      if (s_axi_rvalid && s_axi_rready) s_axi_rvalid <= 1'b0;
      if (rd_fire && !rd_blocked) begin
        rd_pend_q  <= 1'b1;
        rd_kind_q  <= dm_hit(s_axi_araddr) ? REG_DM : csr_hit(s_axi_araddr) ? REG_CSR : REG_IM;
        rd_err_q   <= !(im_hit(s_axi_araddr) || dm_hit(s_axi_araddr) || csr_hit(s_axi_araddr));
        rd_addr2_q <= s_axi_araddr[2];
      end
      if (rd_pend_q) begin
        rd_pend_q    <= 1'b0;
        s_axi_rvalid <= 1'b1;
        s_axi_rresp  <= rd_err_q ? RESP_SLVERR : RESP_OKAY;
        case (rd_kind_q)
          REG_DM:  s_axi_rdata <= dm_rdata;
          REG_CSR: s_axi_rdata <= rd_addr2_q ? {30'b0, running, done} : {30'b0, bank, 1'b0};
          default: s_axi_rdata <= '0;
        endcase
      end
    end
  end

endmodule
