// data_mem: data memory, 2**AW x 32 bits (8192 words as in the paper), true
// dual port with byte enables and registered reads.
//
// Port A belongs to the core (loads/stores and buffer transfers), port B to
// the host through the AXI manager. The memory is used as two equal halves,
// first (top address bit 0) and last (1): while the core computes on one
// half the host reads results from and writes new input into the other
// (ping-pong). Each port: en=1 starts an access; we[i] writes byte i; rdata
// is mem[addr] as it was before the edge, valid one cycle later and held
// while en=0. Two ports writing the same word in one cycle is undefined (the
// ping-pong schedule keeps them in different halves).
module data_mem #(
  parameter int unsigned AW = 13
) (
  input  logic          clk,
  input  logic          a_en,
  input  logic [3:0]    a_we,
  input  logic [AW-1:0] a_addr,
  input  logic [31:0]   a_wdata,
  output logic [31:0]   a_rdata,
  input  logic          b_en,
  input  logic [3:0]    b_we,
  input  logic [AW-1:0] b_addr,
  input  logic [31:0]   b_wdata,
  output logic [31:0]   b_rdata
);

  logic [31:0] mem [2**AW];

  // both ports in one process: a variable may be written by one always_ff only
  always_ff @(posedge clk) begin
    if (a_en) begin
      for (int i = 0; i < 4; i++)
        if (a_we[i]) mem[a_addr][8*i +: 8] <= a_wdata[8*i +: 8];
      a_rdata <= mem[a_addr];
    end
    if (b_en) begin
      for (int i = 0; i < 4; i++)
        if (b_we[i]) mem[b_addr][8*i +: 8] <= b_wdata[8*i +: 8];
      b_rdata <= mem[b_addr];
    end
  end

endmodule
