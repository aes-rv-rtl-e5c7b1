// aes_cipher: the cipher part of the multi-mode AES core (encryption).
//
// The round loop is cut by four registers, at the places the accelerator's
// block diagram draws them:
//   s0: state after AddRoundKey (input of SubByte)
//   s1: after SubByte
//   s2: after ShiftRow  (the final round leaves the loop here)
//   s3: after MixColumn (AddRoundKey sits between s3 and s0)
// The first AddRoundKey (with round key 0) is applied to the input block as
// it enters s0. Rounds 1..Nr-1 go s0->s1->s2->s3->s0; in round Nr the value in
// s2 goes through the final AddRoundKey into the output register.
//
// One block is in flight at a time (the chaining modes need each result
// before the next block can start), so each round costs four cycles.
// Timing: with 'start' sampled at edge 0, 'done' and 'block_out' are valid
// after edge 4*Nr-1 (39, 47, 55 for AES-128/192/256). block_out holds until
// the next result. A start while busy is ignored (an assertion flags it).
module aes_cipher
  import aesrv_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [3:0]  num_rounds,
  input  round_keys_t round_keys,
  input  aes_block_t  block_in,
  output aes_block_t  block_out,
  output logic        busy,
  output logic        done
);

  aes_block_t s0_q, s1_q, s2_q, s3_q;
  logic [3:0] v_q;           // which stage holds the block
  logic [3:0] round_q;       // round the block is in (1..Nr)
  logic [3:0] nr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s0_q <= '0; s1_q <= '0; s2_q <= '0; s3_q <= '0;
      v_q <= '0; round_q <= '0; nr_q <= 4'd10;
      block_out <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      v_q  <= '0;
      if (start && v_q == '0) begin
        s0_q    <= block_in ^ round_keys[0];
        v_q[0]  <= 1'b1;
        round_q <= 4'd1;
        nr_q    <= num_rounds;
      end
      if (v_q[0]) begin
        s1_q   <= sub_bytes(s0_q);
        v_q[1] <= 1'b1;
      end
      if (v_q[1]) begin
        s2_q   <= shift_rows(s1_q);
        v_q[2] <= 1'b1;
      end
      if (v_q[2]) begin
        if (round_q == nr_q) begin
          block_out <= s2_q ^ round_keys[nr_q];   // final round: no MixColumn
          done      <= 1'b1;
        end else begin
          s3_q   <= mix_columns(s2_q);
          v_q[3] <= 1'b1;
        end
      end
      if (v_q[3]) begin
        s0_q    <= s3_q ^ round_keys[round_q];
        v_q[0]  <= 1'b1;
        round_q <= round_q + 4'd1;
      end
    end
  end

  assign busy = |v_q;

  a_no_start_while_busy: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("aes_cipher: start while a block is in flight");

endmodule
