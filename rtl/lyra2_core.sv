// lyra2_core: pipelined Lyra2 core for the Lyra2REv2 proof-of-work chain.
//
// It computes K = Lyra2(pwd, salt = pwd) with T = 1, R = 4, C = 4 and
// k = 256 bits, the Lyra2 instance between CubeHash-256 and Skein-256 in
// Lyra2REv2. The datapath is the paper's: a 1024-bit duplex (state register,
// input XOR, BLAKE2b round) whose input is either pwd||pwd or the word-wise
// sum of two RAM ports qa and qb; two XOR blocks that combine the round
// output (and its one-word rotation) with RAM ports qc and qd to produce the
// two RAM writes; and a 4-read/2-write RAM made of two replicated two-port
// block RAMs clocked at 2x (clk2x). The RAM holds the 4x4x768-bit memory
// matrix of each hash in flight plus two constant blocks, zero and
// pad(params). The round is pipelined with PIPE_STAGES stages (8 in the
// paper); PIPE_STAGES hashes are then processed at the same time, each in
// its own RAM region, one round per hash every PIPE_STAGES cycles.
//
// Interface: in_valid/in_ready handshake for the 256-bit pwd (a transfer
// happens when both are high at a clk edge); out_valid pulses for one cycle
// with the 256-bit K. Results leave in the order the inputs were accepted,
// 68*PIPE_STAGES + 1 clk edges after acceptance (68 rounds per hash: 24
// bootstrapping, 16 setup, 16 wandering, 12 wrap-up). With inputs always
// available the core accepts PIPE_STAGES hashes per 68*PIPE_STAGES cycles.
// Reset (rst_n, asynchronous, active low) clears the controller; the first
// cycle after it writes the two constants. Vectors are little-endian: word i
// of pwd and K is bits [64i+63:64i], byte j of the byte string is bits
// [8j+7:8j]. The handshake, the reset and the output register are this
// design's own choices; the paper does not describe the core's interface.
module lyra2_core
  import lyra2_pkg::*;
#(
  parameter int unsigned PIPE_STAGES = 8
) (
  input  logic           clk,
  input  logic           clk2x,
  input  logic           rst_n,
  input  logic           in_valid,
  output logic           in_ready,
  input  logic [H_W-1:0] in_pwd,
  output logic           out_valid,
  output logic [H_W-1:0] out_k
);

  localparam int unsigned DEPTH = PIPE_STAGES * CELLS + 2;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic            accept;
  feed_sel_e       feed_sel;
  logic [AW-1:0]   raddr [4];
  logic            we    [2];
  logic [AW-1:0]   waddr [2];
  block_t          wdata [2];
  block_t          q     [4];
  block_t          wb0, wb1;
  logic            collide, init_wr, done;
  block_t          din;
  state_t          round_out;

  lyra2_ctrl #(.PIPE_STAGES(PIPE_STAGES), .DEPTH(DEPTH), .AW(AW)) u_ctrl (
    .clk, .rst_n,
    .in_valid_i (in_valid),
    .in_ready_o (in_ready),
    .accept_o   (accept),
    .lsw_i      (round_out[ROW_W-1:0]),
    .feed_sel_o (feed_sel),
    .raddr_o    (raddr),
    .we_o       (we),
    .waddr_o    (waddr),
    .collide_o  (collide),
    .init_wr_o  (init_wr),
    .done_o     (done)
  );

  lyra2_feed u_feed (
    .clk,
    .load_pwd_i (accept),
    .pwd_i      (in_pwd),
    .sel_i      (feed_sel),
    .qa_i       (q[0]),
    .qb_i       (q[1]),
    .din_o      (din)
  );

  lyra2_duplex #(.PIPE_STAGES(PIPE_STAGES)) u_duplex (
    .clk,
    .load_init_i(accept),
    .din_i      (din),
    .round_o    (round_out)
  );

  lyra2_writeback u_wb (
    .rand_i   (round_out[B_W-1:0]),
    .qc_i     (q[2]),
    .qd_i     (q[3]),
    .collide_i(collide),
    .wdata0_o (wb0),
    .wdata1_o (wb1)
  );

  // constants are written once after reset
  assign wdata[0] = init_wr ? '0         : wb0;
  assign wdata[1] = init_wr ? PAD_PARAMS : wb1;

  lyra2_mpram #(.WIDTH(B_W), .DEPTH(DEPTH), .AW(AW)) u_ram (
    .clk, .clk2x,
    .raddr_i(raddr),
    .we_i   (we),
    .waddr_i(waddr),
    .wdata_i(wdata),
    .q_o    (q)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_k     <= '0;
    end else begin
      out_valid <= done;
      if (done) out_k <= round_out[H_W-1:0];
    end
  end

endmodule
