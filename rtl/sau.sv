// sau: the specialized AES unit. It wraps the multi-mode AES core with the
// logic of the four block-cipher modes and runs a whole sequence of blocks
// held in the buffer set.
//
// Mode datapath (V is the IV / chaining / counter register, P a plaintext
// block, E the AES core):
//   ECB  C = E(P)
//   CBC  C = E(P ^ V),  V <- C
//   CFB  C = E(V) ^ P,  V <- C      (full 128-bit feedback)
//   CTR  C = E(V) ^ P,  V <- V + 1  (128-bit counter)
// The IV register, the '+1' counter adder, the plaintext XOR, the muxes in
// front of the core and the ciphertext feedback are the paper's structure.
//
// Buffer layout (this design's choice): words KEY_BASE..+7 hold the key
// (first 4/6/8 words used), IV_BASE..+3 the IV or counter, and block k sits
// at DATA_BASE+4k. Each result overwrites its plaintext; at the end the final
// V is written back to IV_BASE so that a later call continues the chain.
// The key is expanded once, before the first block.
//
// Interface and timing: 'start' (one cycle) samples mode, key size and
// num_blocks (0 means none; more than fit are clamped). 'busy' rises in the
// next cycle; results come out on blk_we/blk_idx/blk_wdata one block at a
// time, and 'done' pulses one cycle after the IV write-back. Per block the
// core needs 4*Nr+1 cycles plus 2 cycles of hand-over here; the first block
// also pays for the key expansion.
module sau
  import aesrv_pkg::*;
#(
  parameter int unsigned NUM_BUF   = 256,
  parameter int unsigned KEY_BASE  = 0,
  parameter int unsigned IV_BASE   = 8,
  parameter int unsigned DATA_BASE = 12,
  localparam int unsigned IW = $clog2(NUM_BUF),
  localparam int unsigned MAX_BLOCKS = (NUM_BUF - DATA_BASE) / 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  aes_mode_e     mode,
  input  aes_keysize_e  key_size,
  input  logic [7:0]    num_blocks,
  input  logic [31:0]   bufs [NUM_BUF],
  output logic          blk_we,
  output logic [IW-1:0] blk_idx,
  output logic [127:0]  blk_wdata,
  output logic          busy,
  output logic          done
);

  typedef enum logic [2:0] {IDLE, ISSUE, WAIT, FIN} state_e;
  state_e       state_q;
  aes_mode_e    mode_q;
  aes_keysize_e ks_q;
  logic [7:0]   n_q, k_q;
  aes_block_t   iv_q;

  logic [255:0] key;
  aes_block_t   pt, core_in, core_out, result;
  logic         core_start, core_done;
  logic [IW-1:0] blk_base;

  always_comb begin
    for (int i = 0; i < 8; i++) key[255-32*i -: 32] = bufs[KEY_BASE + i];
    blk_base = IW'(DATA_BASE) + IW'({k_q, 2'b00});
    for (int i = 0; i < 4; i++) pt[127-32*i -: 32] = bufs[IW'(blk_base + IW'(i))];
    // input mux of the core
    case (mode_q)
      MODE_ECB: core_in = pt;
      MODE_CBC: core_in = pt ^ iv_q;
      default:  core_in = iv_q;        // CFB, CTR
    endcase
    // output side
    case (mode_q)
      MODE_ECB, MODE_CBC: result = core_out;
      default:            result = core_out ^ pt;
    endcase
  end

  assign core_start = (state_q == ISSUE);

  aes_multimode_core u_core (
    .clk, .rst_n,
    .start(core_start), .rekey(k_q == 8'd0), .key_size(ks_q), .key,
    .block_in(core_in), .block_out(core_out), .busy(), .done(core_done)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= IDLE;
      mode_q    <= MODE_ECB;
      ks_q      <= KEY_128;
      n_q       <= '0;
      k_q       <= '0;
      iv_q      <= '0;
      blk_we    <= 1'b0;
      blk_idx   <= '0;
      blk_wdata <= '0;
      done      <= 1'b0;
    end else begin
      blk_we <= 1'b0;
      done   <= 1'b0;
      case (state_q)
        IDLE: if (start) begin
          mode_q  <= mode;
          ks_q    <= key_size;
          n_q     <= (num_blocks > 8'(MAX_BLOCKS)) ? 8'(MAX_BLOCKS) : num_blocks;
          k_q     <= '0;
          for (int i = 0; i < 4; i++) iv_q[127-32*i -: 32] <= bufs[IV_BASE + i];
          state_q <= (num_blocks == 8'd0) ? FIN : ISSUE;
        end
        ISSUE: state_q <= WAIT;
        WAIT: if (core_done) begin
          blk_we    <= 1'b1;
          blk_idx   <= blk_base;
          blk_wdata <= result;
          case (mode_q)
            MODE_CBC, MODE_CFB: iv_q <= result;
            MODE_CTR:           iv_q <= iv_q + 128'd1;
            default:            iv_q <= iv_q;
          endcase
          k_q     <= k_q + 8'd1;
          state_q <= (k_q + 8'd1 == n_q) ? FIN : ISSUE;
        end
        FIN: begin
          // write the chaining value back for the next call
          blk_we    <= 1'b1;
          blk_idx   <= IW'(IV_BASE);
          blk_wdata <= iv_q;
          done      <= 1'b1;
          state_q   <= IDLE;
        end
        default: state_q <= IDLE;
      endcase
    end
  end

  assign busy = (state_q != IDLE) || blk_we;

endmodule
