// lyra2_duplex: the sponge duplex of the Lyra2 core (State, input XOR and
// Round of the datapath figure).
//
// Each cycle the b = 768-bit input din_i is xored into the lower b bits of
// the state register and the result goes through blake2b_round. The round
// output, round_o, is the bus that feeds the state register again, the two
// write-back XOR blocks and the K output. With PIPE_STAGES > 1 the round is
// pipelined and the state register plus the round's PIPE_STAGES-1 registers
// form a loop that holds PIPE_STAGES independent hashes, one per register;
// round_o then belongs to the hash whose input was applied PIPE_STAGES-1
// cycles earlier. load_init_i loads the BLAKE2b start state (zeros in the
// lower 512 bits, the BLAKE2b IV in the upper 512) in place of round_o; the
// paper does not say how the state is initialised, so this load path is this
// design's own choice. The state register has no reset: every hash starts by
// loading it.
module lyra2_duplex
  import lyra2_pkg::*;
#(
  parameter int unsigned PIPE_STAGES = 8
) (
  input  logic   clk,
  input  logic   load_init_i,
  input  block_t din_i,
  output state_t round_o
);

  state_t state_q;
  state_t absorbed;

  assign absorbed = {state_q[STATE_W-1:B_W], state_q[B_W-1:0] ^ din_i};

  blake2b_round #(.PIPE_STAGES(PIPE_STAGES)) u_round (
    .clk,
    .state_i(absorbed),
    .state_o(round_o)
  );

  always_ff @(posedge clk) begin
    state_q <= load_init_i ? INIT_STATE : round_o;
  end

endmodule
