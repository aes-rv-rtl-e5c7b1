// state_controller: the start/done handshake between the host and the core.
//
// IDLE: the core is held (run=0). A 'start' pulse latches which half of data
// memory this run works on ('bank_in': 0 = first, 1 = last), pulses 'clear'
// so the core restarts at PC 0 with an empty pipeline, and enters RUN. When
// the core retires its end-of-program instruction ('halt'), the controller
// stops the core and raises 'done', which stays high until the next start.
// A start during RUN is ignored. The paper gives the start/done signals and
// the two-half data memory; the states and the halt convention are this
// design's.
module state_controller (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic bank_in,
  input  logic halt,
  output logic clear,
  output logic run,
  output logic done,
  output logic bank
);

  typedef enum logic [1:0] {IDLE, RUN, DONE} state_e;
  state_e state_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= IDLE;
      bank    <= 1'b0;
      clear   <= 1'b0;
    end else begin
      clear <= 1'b0;
      case (state_q)
        IDLE, DONE: if (start) begin
          bank    <= bank_in;
          clear   <= 1'b1;
          state_q <= RUN;
        end
        RUN: if (halt) state_q <= DONE;
        default: state_q <= IDLE;
      endcase
    end
  end

  assign run  = (state_q == RUN) && !clear;
  assign done = (state_q == DONE);

endmodule
