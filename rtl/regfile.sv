// regfile: the integer register file of the core, NUM_REGS x 32 bits, two
// combinational read ports and one write port; x0 always reads zero.
//
// A read of the register being written in the same cycle returns the new
// value (write-through), so the decode stage sees write-back results without
// an extra bypass. Writes land at the clock edge. The accelerator's diagram
// prints "128x32b" for this file, but the 5-bit register fields of the
// instruction formats reach only 32 registers, so NUM_REGS defaults to 32
// (RV32I); with a larger value the extra registers are unreachable.
module regfile #(
  parameter int unsigned NUM_REGS = 32,
  localparam int unsigned AW = 5
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [AW-1:0] rs1_addr,
  input  logic [AW-1:0] rs2_addr,
  output logic [31:0]   rs1_data,
  output logic [31:0]   rs2_data,
  input  logic          we,
  input  logic [AW-1:0] rd_addr,
  input  logic [31:0]   rd_data
);

  logic [31:0] regs_q [NUM_REGS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_REGS; i++) regs_q[i] <= '0;
    end else if (we && rd_addr != '0) begin
      regs_q[rd_addr] <= rd_data;
    end
  end

  function automatic logic [31:0] rd_port(logic [AW-1:0] a);
    if (a == '0)                  return '0;
    else if (we && rd_addr == a)  return rd_data;
    else                          return regs_q[a];
  endfunction

  assign rs1_data = rd_port(rs1_addr);
  assign rs2_data = rd_port(rs2_addr);

endmodule
