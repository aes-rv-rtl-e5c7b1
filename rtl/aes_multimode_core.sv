// aes_multimode_core: the multi-mode AES core (encryption, 128/192/256-bit
// keys).
//
// Three parts, as in the accelerator's diagram: the controller (turns the
// key-size mode into NumRound and sequences the parts), the key expansion
// part (round keys, one word per cycle) and the cipher part (four-register
// round loop). The key size is sampled by the controller at 'start'; the
// key itself is sampled by the key expansion at its start, and block_in by
// the cipher part when it starts (one cycle after the controller's start if
// rekey=0, one cycle after key expansion finishes otherwise), so both must
// stay stable until 'done'.
//
// Latency from start to done: AES-128 41 cycles without rekey, 82 with;
// AES-192 49 / 96; AES-256 57 / 110.
module aes_multimode_core
  import aesrv_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         rekey,
  input  aes_keysize_e key_size,
  input  logic [255:0] key,
  input  aes_block_t   block_in,
  output aes_block_t   block_out,
  output logic         busy,
  output logic         done
);

  logic [3:0]   num_rounds;
  logic         ke_start, ke_done;
  logic         ci_start, ci_done;
  round_keys_t  round_keys;

  aes_core_controller u_ctrl (
    .clk, .rst_n, .start, .rekey, .key_size,
    .num_rounds,
    .ke_start, .ke_done, .ci_start, .ci_done,
    .busy, .done
  );

  aes_key_expansion u_keyexp (
    .clk, .rst_n,
    .start(ke_start), .key_size(key_size), .key,
    .round_keys, .busy(), .done(ke_done)
  );

  aes_cipher u_cipher (
    .clk, .rst_n,
    .start(ci_start), .num_rounds, .round_keys,
    .block_in, .block_out, .busy(), .done(ci_done)
  );

endmodule
