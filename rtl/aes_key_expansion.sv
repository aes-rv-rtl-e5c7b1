// aes_key_expansion: the key expansion part of the multi-mode AES core.
//
// Expands a 128, 192 or 256-bit cipher key into the 4*(Nr+1) words of the
// AES key schedule, one word per clock, using the three functions the
// accelerator names: RotWord, SubWord and the round constant. For word i
// (Nk = 4/6/8 key words):
//   t = w[i-1]
//   if i mod Nk == 0           : t = SubWord(RotWord(t)) ^ {Rcon, 24'h0}
//   else if Nk == 8, i mod 8==4: t = SubWord(t)
//   w[i] = w[i-Nk] ^ t
// The round constant is kept in a register and advanced with xtime, and the
// S-box is computed from the GF(2^8) inverse (aesrv_pkg), so no table is
// stored.
//
// Interface and timing: a one-cycle 'start' loads 'key' (word 0 in bits
// [255:224]; for 128/192-bit keys only the top 4/6 words are used) and
// 'key_size'. busy is high while words are produced; 'done' is high for one
// cycle, 4*(Nr+1)-Nk clock edges after the start edge (40, 46 and 52 for
// AES-128/192/256), when the last word is already written. round_keys[r] is {w[4r]..w[4r+3]}
// and stays valid until the next start. The one-word-per-cycle schedule is
// this design's choice; the paper gives the functions, not the timing.
module aes_key_expansion
  import aesrv_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  aes_keysize_e key_size,
  input  logic [255:0] key,
  output round_keys_t  round_keys,
  output logic         busy,
  output logic         done
);

  logic [31:0] w_q [MAX_KEY_WORDS];
  logic [5:0]  idx_q;       // word being produced
  logic [5:0]  last_q;      // index of the last word
  logic [2:0]  j_q;         // idx mod Nk
  logic [3:0]  nk_q;
  logic [7:0]  rcon_q;
  logic        busy_q;

  logic [31:0] temp, w_prev, w_back, w_new;

  always_comb begin
    w_prev = w_q[idx_q - 6'd1];
    w_back = w_q[idx_q - 6'(nk_q)];
    temp   = w_prev;
    if (j_q == 3'd0)
      temp = sub_word(rot_word(w_prev)) ^ {rcon_q, 24'h0};
    else if (nk_q == 4'd8 && j_q == 3'd4)
      temp = sub_word(w_prev);
    w_new = w_back ^ temp;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < MAX_KEY_WORDS; i++) w_q[i] <= '0;
      idx_q  <= '0;
      last_q <= '0;
      j_q    <= '0;
      nk_q   <= 4'd4;
      rcon_q <= 8'h01;
      busy_q <= 1'b0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        for (int i = 0; i < 8; i++) w_q[i] <= key[255-32*i -: 32];
        nk_q   <= key_words_for(key_size);
        idx_q  <= 6'(key_words_for(key_size));
        last_q <= 6'(4 * (int'(rounds_for(key_size)) + 1) - 1);
        j_q    <= '0;
        rcon_q <= 8'h01;
        busy_q <= 1'b1;
      end else if (busy_q) begin
        w_q[idx_q] <= w_new;
        idx_q <= idx_q + 6'd1;
        if (j_q == 3'(nk_q - 4'd1)) j_q <= '0;
        else                        j_q <= j_q + 3'd1;
        if (j_q == 3'd0) rcon_q <= xtime(rcon_q);
        if (idx_q == last_q) begin
          busy_q <= 1'b0;
          done   <= 1'b1;
        end
      end
    end
  end

  always_comb begin
    for (int r = 0; r <= MAX_ROUNDS; r++)
      round_keys[r] = {w_q[4*r], w_q[4*r+1], w_q[4*r+2], w_q[4*r+3]};
  end

  assign busy = busy_q;

endmodule
