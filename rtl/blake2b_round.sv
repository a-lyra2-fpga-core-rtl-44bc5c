// blake2b_round: one round of the BLAKE2b permutation as Lyra2 uses it,
// on the 1024-bit sponge state, with PIPE_STAGES-1 internal pipeline
// registers.
//
// The round applies G (blake2b_g) to the four columns of the 4x4 word state,
// (0,4,8,12) (1,5,9,13) (2,6,10,14) (3,7,11,15), and then to the four
// diagonals, (0,5,10,15) (1,6,11,12) (2,7,8,13) (3,4,9,14). That is eight
// add/xor-rotate steps in a row. The paper pipelines the round with eight
// stages; in this core the duplex state register is the eighth register of
// that loop, so the round itself holds PIPE_STAGES-1 registers, placed evenly
// after every 8/PIPE_STAGES steps (after each step when PIPE_STAGES = 8).
// PIPE_STAGES = 1 gives the paper's basic iterative architecture (purely
// combinational round). Even spacing is this design's own choice.
//
// Timing: state_o is state_i of PIPE_STAGES-1 cycles earlier, transformed.
module blake2b_round
  import lyra2_pkg::*;
#(
  parameter int unsigned PIPE_STAGES = 8  // 1, 2, 4 or 8
) (
  input  logic   clk,
  input  state_t state_i,
  output state_t state_o
);

  localparam int unsigned STEPS_PER_STAGE = 8 / PIPE_STAGES;

  // register after global step s (0..7), never after the last one
  function automatic logic [3:0] reg_mask(input int unsigned layer);
    logic [3:0] m;
    for (int unsigned i = 0; i < 4; i++) begin
      automatic int unsigned s = layer * 4 + i;
      m[i] = ((s + 1) % STEPS_PER_STAGE == 0) && (s != 7);
    end
    return m;
  endfunction

  localparam logic [3:0] MASK_COL  = reg_mask(0);
  localparam logic [3:0] MASK_DIAG = reg_mask(1);

  // word indices of the G inputs a, b, c, d
  localparam int unsigned COL_IDX  [4][4] = '{'{0, 4,  8, 12}, '{1, 5,  9, 13},
                                            '{2, 6, 10, 14}, '{3, 7, 11, 15}};
  localparam int unsigned DIAG_IDX [4][4] = '{'{0, 5, 10, 15}, '{1, 6, 11, 12},
                                            '{2, 7,  8, 13}, '{3, 4,  9, 14}};

  word_t v0 [STATE_WDS];  // round input
  word_t v1 [STATE_WDS];  // after column layer
  word_t v2 [STATE_WDS];  // after diagonal layer

  for (genvar w = 0; w < STATE_WDS; w++) begin : g_unpack
    assign v0[w] = state_i[w*WORD_W +: WORD_W];
    assign state_o[w*WORD_W +: WORD_W] = v2[w];
  end

  for (genvar g = 0; g < 4; g++) begin : g_col
    blake2b_g #(.REG_AFTER(MASK_COL)) u_g (
      .clk,
      .a_i(v0[COL_IDX[g][0]]), .b_i(v0[COL_IDX[g][1]]),
      .c_i(v0[COL_IDX[g][2]]), .d_i(v0[COL_IDX[g][3]]),
      .a_o(v1[COL_IDX[g][0]]), .b_o(v1[COL_IDX[g][1]]),
      .c_o(v1[COL_IDX[g][2]]), .d_o(v1[COL_IDX[g][3]])
    );
  end

  for (genvar g = 0; g < 4; g++) begin : g_diag
    blake2b_g #(.REG_AFTER(MASK_DIAG)) u_g (
      .clk,
      .a_i(v1[DIAG_IDX[g][0]]), .b_i(v1[DIAG_IDX[g][1]]),
      .c_i(v1[DIAG_IDX[g][2]]), .d_i(v1[DIAG_IDX[g][3]]),
      .a_o(v2[DIAG_IDX[g][0]]), .b_o(v2[DIAG_IDX[g][1]]),
      .c_o(v2[DIAG_IDX[g][2]]), .d_o(v2[DIAG_IDX[g][3]])
    );
  end

  initial begin
    assert (PIPE_STAGES inside {1, 2, 4, 8})
      else $error("blake2b_round: PIPE_STAGES must be 1, 2, 4 or 8");
  end

endmodule
