// lyra2_pkg: constants and types shared by the Lyra2 core.
//
// The Lyra2 instance of Lyra2REv2 runs a 1024-bit sponge whose permutation is
// the BLAKE2b round. The state is sixteen 64-bit words; the lower b = 768 bits
// (words 0..11) are the bitrate and the upper c = 256 bits the capacity. The
// instance parameters T = 1, R = 4, C = 4 and k = 256 follow the paper. Word i
// of any vector here sits in bits [64*i+63 : 64*i], and bytes inside a word
// are little-endian, so byte j of a 256-bit password is bits [8*j+7 : 8*j].
//
// Also here: the phase encoding of the per-hash controller and the context
// record that travels alongside each hash through the round pipeline. The
// phase names follow the paper's state names (Bootstrap, Setup0..2, Wandering,
// Wrap-up); the paper's single Bootstrap state is split in two, one per
// 12-round absorb, which is this design's own choice.
package lyra2_pkg;

  localparam int unsigned WORD_W    = 64;
  localparam int unsigned STATE_WDS = 16;               // 1024-bit sponge
  localparam int unsigned B_WDS     = 12;               // bitrate b = 768
  localparam int unsigned B_W       = B_WDS * WORD_W;   // 768
  localparam int unsigned C_W       = (STATE_WDS - B_WDS) * WORD_W; // 256
  localparam int unsigned STATE_W   = STATE_WDS * WORD_W;           // 1024
  localparam int unsigned H_W       = 256;              // pwd and K width

  // Lyra2REv2 instance of Lyra2
  localparam int unsigned LYRA_T    = 1;   // time cost
  localparam int unsigned LYRA_R    = 4;   // rows of M
  localparam int unsigned LYRA_C    = 4;   // columns of M
  localparam int unsigned LYRA_K    = 256; // output length in bits
  localparam int unsigned FULL_RNDS = 12;  // rounds of a full-round absorb
  localparam int unsigned ROW_W     = $clog2(LYRA_R);
  localparam int unsigned COL_W     = $clog2(LYRA_C);
  localparam int unsigned CELLS     = LYRA_R * LYRA_C; // cells of M per hash

  typedef logic [WORD_W-1:0] word_t;
  typedef logic [B_W-1:0]    block_t;
  typedef logic [STATE_W-1:0] state_t;

  // BLAKE2b initialisation vector: occupies words 8..15 of the initial state
  localparam logic [511:0] BLAKE2B_IV = {
    64'h5be0cd19137e2179, 64'h1f83d9abfb41bd6b,
    64'h9b05688c2b3e6c1f, 64'h510e527fade682d1,
    64'ha54ff53a5f1d36f1, 64'h3c6ef372fe94f82b,
    64'hbb67ae8584caa73b, 64'h6a09e667f3bcc908};

  localparam state_t INIT_STATE = {BLAKE2B_IV, 512'b0};

  // pad(params): len(K) || len(pwd) || len(salt) || T || R || C in bytes/units,
  // then the 10*1 padding (0x80 in the next byte, 0x01 in the last byte of
  // the 512-bit block). The upper 256 bits of the b-bit vector are zero.
  localparam block_t PAD_PARAMS = {
    256'b0,
    64'h0100000000000000, 64'h0000000000000080,
    64'(LYRA_C), 64'(LYRA_R), 64'(LYRA_T),
    64'd32, 64'd32, 64'(LYRA_K / 8)};

  typedef enum logic [2:0] {
    PH_IDLE   = 3'd0,
    PH_BOOT0  = 3'd1,  // full-round absorb of pwd || pwd
    PH_BOOT1  = 3'd2,  // full-round absorb of pad(params)
    PH_SETUP0 = 3'd3,
    PH_SETUP1 = 3'd4,
    PH_SETUP2 = 3'd5,
    PH_WANDER = 3'd6,
    PH_WRAP   = 3'd7
  } phase_e;

  // Duplex input select
  typedef enum logic {
    FEED_SUM = 1'b0,  // qa [+] qb (word-wise 64-bit addition)
    FEED_PWD = 1'b1   // 0 || pwd || pwd
  } feed_sel_e;

  // Context of one hash for the round it is executing.
  typedef struct packed {
    phase_e            phase;
    logic [3:0]        rnd;   // round of a full-round absorb, 0..11
    logic [COL_W-1:0]  col;
    logic [ROW_W-1:0]  row0;
    logic [ROW_W-1:0]  row1;
  } ctx_t;

  localparam ctx_t CTX_IDLE = '{phase: PH_IDLE, rnd: '0, col: '0, row0: '0, row1: '0};

  // Right rotation of a 64-bit word
  function automatic word_t rotr64(input word_t x, input int unsigned n);
    return (x >> n) | (x << (WORD_W - n));
  endfunction

  // Rotation of a b-bit block left by omega = 64 bits (one word).
  function automatic block_t rot_w(input block_t x);
    return {x[B_W-WORD_W-1:0], x[B_W-1 -: WORD_W]};
  endfunction

endpackage
