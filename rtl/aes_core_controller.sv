// aes_core_controller: the controller of the multi-mode AES core.
//
// From the key size it derives NumRound (10, 12 or 14), which both the key
// expansion part and the cipher part use. On 'start' it runs the key
// expansion part first (only when 'rekey' is set) and then the cipher part,
// and pulses 'done' in the cycle after the cipher part reports its result.
// Skipping the expansion for the second and later blocks of a run that
// shares one key is this design's choice; deriving the round count from the
// mode is the paper's.
//
// Timing: start at edge 0; with rekey the key expansion starts at edge 0, the
// cipher one cycle after the expansion's done, and done follows the cipher's
// done by one cycle. Without rekey the cipher starts one cycle after start.
module aes_core_controller
  import aesrv_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         rekey,
  input  aes_keysize_e key_size,
  output logic [3:0]   num_rounds,
  output logic         ke_start,
  input  logic         ke_done,
  output logic         ci_start,
  input  logic         ci_done,
  output logic         busy,
  output logic         done
);

  typedef enum logic [1:0] {IDLE, KEYEXP, LAUNCH, CIPHER} state_e;
  state_e       state_q;
  aes_keysize_e key_size_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= IDLE;
      key_size_q <= KEY_128;
      done       <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state_q)
        IDLE:   if (start) begin
                  key_size_q <= key_size;
                  state_q    <= rekey ? KEYEXP : LAUNCH;
                end
        KEYEXP: if (ke_done) state_q <= LAUNCH;
        LAUNCH: state_q <= CIPHER;
        CIPHER: if (ci_done) begin
                  state_q <= IDLE;
                  done    <= 1'b1;
                end
        default: state_q <= IDLE;
      endcase
    end
  end

  // key expansion starts in the same cycle as the request
  assign ke_start   = (state_q == IDLE) && start && rekey;
  assign ci_start   = (state_q == LAUNCH);
  assign num_rounds = rounds_for(key_size_q);
  assign busy       = (state_q != IDLE);

endmodule
