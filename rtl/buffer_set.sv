// buffer_set: the high-bandwidth buffer set, NUM_BUF x 32-bit registers that
// sit in front of the specialized AES unit (SAU).
//
// Every word is visible on 'bufs' at the same time, so the SAU reads key,
// IV and data without any load instructions. Two write ports:
//   - a word port (wr_*), used by the buffer access unit when it copies words
//     in from data memory;
//   - a 128-bit block port (blk_*), used by the SAU to write a result block
//     (words blk_idx .. blk_idx+3, first word in bits [127:96]) in one cycle.
// A combinational word read port (rd_idx/rd_data) feeds the copy back to data
// memory. Writes land at the clock edge; if both ports hit the same word the
// block port wins (the surrounding core never lets both run together).
// Registers rather than a RAM, because all words are read at once; the
// contents reset to zero. The size (256 x 32) is the paper's.
module buffer_set #(
  parameter int unsigned NUM_BUF = 256,
  localparam int unsigned IW = $clog2(NUM_BUF)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [IW-1:0] wr_idx,
  input  logic [31:0]   wr_data,
  input  logic          blk_we,
  input  logic [IW-1:0] blk_idx,
  input  logic [127:0]  blk_wdata,
  input  logic [IW-1:0] rd_idx,
  output logic [31:0]   rd_data,
  output logic [31:0]   bufs [NUM_BUF]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_BUF; i++) bufs[i] <= '0;
    end else begin
      if (wr_en) bufs[wr_idx] <= wr_data;
      if (blk_we)
        for (int k = 0; k < 4; k++) bufs[IW'(blk_idx + IW'(k))] <= blk_wdata[127-32*k -: 32];
    end
  end

  assign rd_data = bufs[rd_idx];

endmodule
