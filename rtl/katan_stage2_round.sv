// katan_stage2_round -- pipeline stage 2, key scheduler and rounds.
//
// Takes {key, L1, L2} from channel 1, runs `rounds` cipher rounds on it and
// offers {L1, L2} on channel 2. Each round is one clock cycle: katan_round
// computes the next L1/L2 from the current subkey bits (katan_key_schedule)
// and IR bit (katan_ir_lfsr), and all three advance together.
//
// States: IDLE (waiting), RUN (rounds in progress), HOLD (result offered on
// channel 2). A new block is accepted in IDLE, or in HOLD in the same cycle
// the result is taken, so back-to-back blocks cost rounds+1 cycles each.
// `rounds` is sampled when a block is accepted; 0 passes the block through
// unchanged. The paper gives the stage split and the round equations; the
// one-round-per-cycle schedule and the state machine are this design's.
module katan_stage2_round
  import katan_pkg::*;
#(
  parameter int unsigned BLOCK_BITS = 32,
  parameter bit          KTANTAN    = 1'b0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] rounds,
  output logic       busy,
  katan_chan_if.rx   ch_in,
  katan_chan_if.tx   ch_out
);
  localparam int unsigned N1 = l1_len(BLOCK_BITS);
  localparam int unsigned N2 = l2_len(BLOCK_BITS);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_HOLD} state_t;
  state_t state;

  logic [N1-1:0] l1, l1_n;
  logic [N2-1:0] l2, l2_n;
  logic [7:0]    rnd, rounds_q;
  logic          accept, running, ka, kb, ir;
  logic [7:0]    t;
  key_t          key_in;

  assign ch_in.ready  = (state == S_IDLE) || (state == S_HOLD && ch_out.ready);
  assign accept       = ch_in.valid && ch_in.ready;
  assign running      = (state == S_RUN);
  assign ch_out.valid = (state == S_HOLD);
  assign ch_out.data  = {l1, l2};
  assign busy         = (state != S_IDLE);
  assign key_in       = ch_in.data[BLOCK_BITS +: KEY_BITS];

  katan_ir_lfsr u_ir (
    .clk, .rst_n, .load(accept), .step(running), .ir, .t
  );

  katan_key_schedule #(.KTANTAN(KTANTAN)) u_ks (
    .clk, .rst_n, .load(accept), .key(key_in), .step(running), .t, .ka, .kb
  );

  katan_round #(.BLOCK_BITS(BLOCK_BITS)) u_round (
    .l1_i(l1), .l2_i(l2), .ka, .kb, .ir, .l1_o(l1_n), .l2_o(l2_n)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      l1       <= '0;
      l2       <= '0;
      rnd      <= '0;
      rounds_q <= '0;
    end else if (accept) begin
      {l1, l2} <= ch_in.data[BLOCK_BITS-1:0];
      rnd      <= '0;
      rounds_q <= rounds;
      state    <= (rounds == 0) ? S_HOLD : S_RUN;
    end else begin
      case (state)
        S_RUN: begin
          l1  <= l1_n;
          l2  <= l2_n;
          rnd <= rnd + 1'b1;
          if (rnd + 1'b1 == rounds_q) state <= S_HOLD;
        end
        S_HOLD: if (ch_out.ready) state <= S_IDLE;
        default: ;
      endcase
    end
  end
endmodule
