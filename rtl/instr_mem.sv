// instr_mem: instruction memory, 2**AW x 32 bits, simple dual port.
// The host writes the compiled program through the AXI manager (write port);
// the fetch stage reads through the read port. The read is registered (block
// RAM style): rdata shows mem[raddr] one cycle after a cycle with re=1 and
// holds while re=0. The depth (4096 words) is this design's choice: the
// paper does not give it, and 4096 x 32 next to the 8192 x 32 data memory
// matches the twelve 36-Kb block RAMs it reports.
module instr_mem #(
  parameter int unsigned AW = 12
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [31:0]   wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [31:0]   rdata
);

  logic [31:0] mem [2**AW];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
