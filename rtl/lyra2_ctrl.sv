// lyra2_ctrl: control path of the Lyra2 core. It sequences every hash
// through the phases of the Lyra2REv2 instance of Lyra2 and generates the
// RAM addresses, write enables and input selects.
//
// One hash takes 68 rounds: Bootstrap0 (12 full-round iterations absorbing
// pwd||pwd), Bootstrap1 (12, pad(params)), Setup0 (4), Setup1 (4), Setup2
// (2 rows x 4), Wandering (4 rows x 4) and Wrap-up (12). With PIPE_STAGES
// pipeline stages in the duplex loop, PIPE_STAGES hashes are in flight and
// each gets one round every PIPE_STAGES cycles. Every hash has a context
// (phase, round, column, row0, row1; prev = row0-1) that travels through a
// shift register beside the data pipeline, so the context that leaves the
// last stage together with the round output describes the round that has
// just finished. From it and the lowest bits of the round output (needed to
// pick the pseudo-random row1 in the Wandering phase) the next context is
// formed; it enters stage 0 together with the new duplex state.
//
// RAM usage per round (address cell_addr(row,col) inside the hash's own region,
// Z = all-zero block, P = pad(params); both constants are shared):
//   phase    qa          qb            qc            qd          writes
//   BOOT0    (pwd mux)   -             Z             Z           -
//   BOOT1    P / Z       Z             Z             Z           rnd 11: M[0][C-1] = out
//   SETUP0   Z           Z             Z             Z           col<C-1: M[0][C-2-col] = out
//   SETUP1   M[0][col]   Z             M[0][col]     Z           M[1][C-1-col]
//   SETUP2   M[r1][col]  M[prev][col]  M[prev][col]  M[r1][col]  M[r0][C-1-col], M[r1][col]
//   WANDER   M[r1][col]  M[prev][col]  M[r0][col]    M[r1][col]  M[r0][col] (not if r0==r1), M[r1][col]
//   WRAP     M[r1][0]/Z  Z             Z             Z           -
// (P and M[r1][0] on qa only in round 0 of BOOT1 / WRAP). A squeeze writes
// the state before the reduced round; the round output of the previous round
// is that state, so each Setup0 write is done one round early, the first one
// in the last Bootstrap1 round. This keeps every write on the round-output
// bus of the figure; it is this design's own way of meeting the algorithm.
//
// Timing. qa/qb addresses are issued one cycle before the round they feed
// (the RAM has one cycle read latency), from the next context. qc/qd feed
// the XORs at the round output, PIPE_STAGES-1 cycles later, so their
// addresses are issued from the delayed context (the paper's delayed control
// path for qc and qd). Writes are issued in the cycle the round output
// appears. After reset, one cycle writes the two constants Z and P into the
// RAM (how the constants get there is not stated in the paper); in_ready is
// low during it. A new hash is accepted when the context leaving the loop is
// idle or is finishing its last Wrap-up round; its first round runs in the
// next cycle and its result appears in out_valid_o exactly 68*PIPE_STAGES
// cycles after it was accepted (the core registers K one more cycle).
// The Setup2 rule row1 = row0-2 and prev = row0-1 hold for R = 4 and T = 1,
// the instance the paper builds for.
module lyra2_ctrl
  import lyra2_pkg::*;
#(
  parameter int unsigned PIPE_STAGES = 8,
  parameter int unsigned DEPTH = PIPE_STAGES * CELLS + 2,
  parameter int unsigned AW    = $clog2(DEPTH),
  parameter int unsigned SW    = (PIPE_STAGES > 1) ? $clog2(PIPE_STAGES) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid_i,
  output logic                in_ready_o,
  output logic                accept_o,     // load pwd and start state
  input  logic [ROW_W-1:0]    lsw_i,        // round output word 0, low bits
  output feed_sel_e           feed_sel_o,   // for the round now in stage 0
  output logic [AW-1:0]       raddr_o [4],  // qa, qb, qc, qd
  output logic                we_o    [2],
  output logic [AW-1:0]       waddr_o [2],
  output logic                collide_o,
  output logic                init_wr_o,    // write constants this cycle
  output logic                done_o        // round output is a final K
);

  localparam logic [AW-1:0] ZERO_ADDR  = AW'(PIPE_STAGES * CELLS);
  localparam logic [AW-1:0] PARAM_ADDR = AW'(PIPE_STAGES * CELLS + 1);
  localparam logic [COL_W-1:0] LAST_COL = COL_W'(LYRA_C - 1);
  localparam logic [ROW_W-1:0] LAST_ROW = ROW_W'(LYRA_R - 1);
  localparam logic [3:0] LAST_RND = 4'(FULL_RNDS - 1);

  typedef struct packed {
    ctx_t          ctx;
    logic [SW-1:0] slot;  // which hash region of the RAM
  } stage_t;

  stage_t stg [PIPE_STAGES];  // stg[0] sits beside the duplex state register
  stage_t out_s, next_s, cd_s;
  logic   init_done;
  logic   finishing;

  function automatic logic [AW-1:0] cell_addr(input logic [SW-1:0] slot,
                                         input logic [ROW_W-1:0] row,
                                         input logic [COL_W-1:0] col);
    return AW'(slot) * AW'(CELLS) + AW'(row) * AW'(LYRA_C) + AW'(col);
  endfunction

  function automatic ctx_t advance(input ctx_t c, input logic [ROW_W-1:0] lsw);
    ctx_t n;
    n = c;
    unique case (c.phase)
      PH_IDLE: n = c;
      PH_BOOT0, PH_BOOT1: begin
        if (c.rnd != LAST_RND) n.rnd = c.rnd + 4'd1;
        else begin
          n.rnd   = '0;
          n.col   = '0;
          n.phase = (c.phase == PH_BOOT0) ? PH_BOOT1 : PH_SETUP0;
        end
      end
      PH_SETUP0, PH_SETUP1: begin
        if (c.col != LAST_COL) n.col = c.col + 1'b1;
        else begin
          n.col = '0;
          if (c.phase == PH_SETUP0) n.phase = PH_SETUP1;
          else begin
            n.phase = PH_SETUP2;
            n.row0  = ROW_W'(2);
            n.row1  = '0;
          end
        end
      end
      PH_SETUP2: begin
        if (c.col != LAST_COL) n.col = c.col + 1'b1;
        else begin
          n.col = '0;
          if (c.row0 != LAST_ROW) begin
            n.row0 = c.row0 + 1'b1;
            n.row1 = c.row0 - 1'b1;   // (row0+1) - 2
          end else begin
            n.phase = PH_WANDER;
            n.row0  = '0;
            n.row1  = lsw;            // lsw(rand) mod R
          end
        end
      end
      PH_WANDER: begin
        if (c.col != LAST_COL) n.col = c.col + 1'b1;
        else begin
          n.col = '0;
          if (c.row0 != LAST_ROW) begin
            n.row0 = c.row0 + 1'b1;
            n.row1 = lsw;
          end else begin
            n.phase = PH_WRAP;        // row1 kept: M[row1][0] is absorbed
            n.rnd   = '0;
          end
        end
      end
      PH_WRAP: begin
        if (c.rnd != LAST_RND) n.rnd = c.rnd + 4'd1;
        else n = CTX_IDLE;
      end
      default: n = CTX_IDLE;
    endcase
    return n;
  endfunction

  assign out_s     = stg[PIPE_STAGES-1];
  assign finishing = (out_s.ctx.phase == PH_WRAP) && (out_s.ctx.rnd == LAST_RND);
  assign in_ready_o = init_done && ((out_s.ctx.phase == PH_IDLE) || finishing);
  assign accept_o  = in_valid_i && in_ready_o;
  assign done_o    = finishing;
  assign init_wr_o = !init_done;

  always_comb begin
    next_s.slot = out_s.slot;
    if (accept_o) next_s.ctx = '{phase: PH_BOOT0, rnd: '0, col: '0, row0: '0, row1: '0};
    else          next_s.ctx = advance(out_s.ctx, lsw_i);
  end

  // context that the qc/qd reads belong to
  if (PIPE_STAGES == 1) begin : g_cd1
    assign cd_s = next_s;
  end else begin : g_cdn
    assign cd_s = stg[PIPE_STAGES-2];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < PIPE_STAGES; i++) begin
        stg[i].ctx  <= CTX_IDLE;
        stg[i].slot <= SW'(i);
      end
      init_done <= 1'b0;
    end else begin
      stg[0] <= next_s;
      for (int i = 1; i < PIPE_STAGES; i++) stg[i] <= stg[i-1];
      init_done <= 1'b1;
    end
  end

  assign feed_sel_o = (stg[0].ctx.phase == PH_BOOT0 && stg[0].ctx.rnd == '0) ? FEED_PWD : FEED_SUM;

  // qa / qb: for the round that starts next cycle
  always_comb begin
    automatic ctx_t c = next_s.ctx;
    automatic logic [ROW_W-1:0] prev = c.row0 - 1'b1;
    raddr_o[0] = ZERO_ADDR;
    raddr_o[1] = ZERO_ADDR;
    unique case (c.phase)
      PH_BOOT1:  if (c.rnd == '0) raddr_o[0] = PARAM_ADDR;
      PH_SETUP1: raddr_o[0] = cell_addr(next_s.slot, '0, c.col);
      PH_SETUP2, PH_WANDER: begin
        raddr_o[0] = cell_addr(next_s.slot, c.row1, c.col);
        raddr_o[1] = cell_addr(next_s.slot, prev, c.col);
      end
      PH_WRAP:   if (c.rnd == '0) raddr_o[0] = cell_addr(next_s.slot, c.row1, '0);
      default: ;
    endcase
  end

  // qc / qd: for the XORs at the round output, PIPE_STAGES-1 cycles later
  always_comb begin
    automatic ctx_t c = cd_s.ctx;
    automatic logic [ROW_W-1:0] prev = c.row0 - 1'b1;
    raddr_o[2] = ZERO_ADDR;
    raddr_o[3] = ZERO_ADDR;
    unique case (c.phase)
      PH_SETUP1: raddr_o[2] = cell_addr(cd_s.slot, '0, c.col);
      PH_SETUP2: begin
        raddr_o[2] = cell_addr(cd_s.slot, prev, c.col);
        raddr_o[3] = cell_addr(cd_s.slot, c.row1, c.col);
      end
      PH_WANDER: begin
        raddr_o[2] = cell_addr(cd_s.slot, c.row0, c.col);
        raddr_o[3] = cell_addr(cd_s.slot, c.row1, c.col);
      end
      default: ;
    endcase
  end

  // writes for the round whose output appears now
  always_comb begin
    automatic ctx_t c = out_s.ctx;
    we_o[0]    = 1'b0;
    we_o[1]    = 1'b0;
    waddr_o[0] = ZERO_ADDR;
    waddr_o[1] = PARAM_ADDR;
    collide_o  = 1'b0;
    if (!init_done) begin
      we_o[0] = 1'b1;   // Z on port 0, pad(params) on port 1
      we_o[1] = 1'b1;
    end else begin
      unique case (c.phase)
        PH_BOOT1: if (c.rnd == LAST_RND) begin
          we_o[0] = 1'b1;
          waddr_o[0] = cell_addr(out_s.slot, '0, LAST_COL);
        end
        PH_SETUP0: if (c.col != LAST_COL) begin
          we_o[0] = 1'b1;
          waddr_o[0] = cell_addr(out_s.slot, '0, LAST_COL - 1'b1 - c.col);
        end
        PH_SETUP1: begin
          we_o[0] = 1'b1;
          waddr_o[0] = cell_addr(out_s.slot, ROW_W'(1), LAST_COL - c.col);
        end
        PH_SETUP2: begin
          we_o[0] = 1'b1;
          waddr_o[0] = cell_addr(out_s.slot, c.row0, LAST_COL - c.col);
          we_o[1] = 1'b1;
          waddr_o[1] = cell_addr(out_s.slot, c.row1, c.col);
        end
        PH_WANDER: begin
          collide_o = (c.row0 == c.row1);
          we_o[0] = !collide_o;
          waddr_o[0] = cell_addr(out_s.slot, c.row0, c.col);
          we_o[1] = 1'b1;
          waddr_o[1] = cell_addr(out_s.slot, c.row1, c.col);
        end
        default: ;
      endcase
    end
  end

  // The two write ports never address one cell in the same cycle.
  a_no_write_collision: assert property (@(posedge clk)
    !(we_o[0] && we_o[1] && waddr_o[0] == waddr_o[1]))
    else $error("lyra2_ctrl: write collision at %0d", waddr_o[0]);

endmodule
