// buffer_access_unit: executes the buffer accessing instructions, which move
// a run of 32-bit words between data memory (DM) and the buffer set.
//
// Programs use two instructions (custom opcode 0101011):
//   funct3 000  latch base_addr and amount (by convention from r8 and r20)
//   funct3 001  copy 'amount' words DM[base_addr..] -> buffers
//   funct3 010  copy 'amount' words buffers -> DM[base_addr..]
// The latch and load codes are the paper's; the store code is this design's,
// since the paper says data moves "for reading or writing" but lists only the
// first two codes. base_addr is a DM word address. 'amount' carries the word
// count in bits [8:0] (1..256, 0 read as 256) and, this design's addition, the
// first buffer index in bits [23:16]; buffer indices wrap modulo NUM_BUF.
//
// Timing: one word per cycle. DM reads have one cycle of latency, so a load
// of N words keeps 'busy' high for N+1 cycles and a store for N cycles. busy
// rises in the cycle after go_load/go_store.
module buffer_access_unit #(
  parameter int unsigned DM_AW   = 13,
  parameter int unsigned NUM_BUF = 256,
  localparam int unsigned IW = $clog2(NUM_BUF)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             latch,
  input  logic [31:0]      base_addr,
  input  logic [31:0]      amount,
  input  logic             go_load,
  input  logic             go_store,
  // data memory port
  output logic             dm_en,
  output logic [3:0]       dm_we,
  output logic [DM_AW-1:0] dm_addr,
  output logic [31:0]      dm_wdata,
  input  logic [31:0]      dm_rdata,
  // buffer set ports
  output logic             buf_we,
  output logic [IW-1:0]    buf_widx,
  output logic [31:0]      buf_wdata,
  output logic [IW-1:0]    buf_ridx,
  input  logic [31:0]      buf_rdata,
  output logic             busy
);

  typedef enum logic [1:0] {IDLE, LOAD, STORE} state_e;
  state_e state_q;

  logic [DM_AW-1:0] base_q;
  logic [IW-1:0]    bstart_q;
  logic [IW:0]      count_q;     // words to move, 1..NUM_BUF
  logic [IW:0]      issued_q;    // words issued so far
  logic             rd_v_q;      // a DM read returns this cycle
  logic [IW-1:0]    rd_idx_q;    // buffer index for that word

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= IDLE;
      base_q   <= '0;
      bstart_q <= '0;
      count_q  <= (IW+1)'(1);
      issued_q <= '0;
      rd_v_q   <= 1'b0;
      rd_idx_q <= '0;
    end else begin
      rd_v_q <= 1'b0;
      case (state_q)
        IDLE: begin
          if (latch) begin
            base_q   <= base_addr[DM_AW-1:0];
            bstart_q <= amount[16 +: IW];
            count_q  <= (amount[IW:0] == '0 || amount[IW:0] > (IW+1)'(NUM_BUF))
                        ? (IW+1)'(NUM_BUF) : amount[IW:0];
          end
          issued_q <= '0;
          if (go_load)       state_q <= LOAD;
          else if (go_store) state_q <= STORE;
        end
        LOAD: begin
          if (issued_q != count_q) begin
            rd_v_q   <= 1'b1;
            rd_idx_q <= bstart_q + IW'(issued_q);
            issued_q <= issued_q + 1'b1;
          end else begin
            state_q <= IDLE;   // the last word is written into the buffers at this edge
          end
        end
        STORE: begin
          issued_q <= issued_q + 1'b1;
          if (issued_q == count_q - 1'b1) state_q <= IDLE;
        end
        default: state_q <= IDLE;
      endcase
    end
  end

  always_comb begin
    dm_en     = 1'b0;
    dm_we     = '0;
    dm_addr   = base_q + DM_AW'(issued_q);
    dm_wdata  = buf_rdata;
    buf_ridx  = bstart_q + IW'(issued_q);
    buf_we    = rd_v_q;
    buf_widx  = rd_idx_q;
    buf_wdata = dm_rdata;
    if (state_q == LOAD && issued_q != count_q) dm_en = 1'b1;
    if (state_q == STORE) begin
      dm_en = 1'b1;
      dm_we = 4'hf;
    end
  end

  assign busy = (state_q != IDLE);

endmodule
