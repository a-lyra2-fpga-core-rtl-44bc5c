// lyra2_feed: the duplex input multiplexer with its word-wise adder.
//
// The duplex absorbs either the word-wise sum qa [+] qb of two RAM read
// ports (twelve independent 64-bit additions, carries do not cross word
// boundaries) or the vector 0^256 || pwd || pwd, which is the first
// bootstrapping block. Constant blocks (the zero vector and pad(params)) come
// from the RAM through the adder, as in the paper. pwd_i is captured in a
// register when load_pwd_i is high (the cycle a hash is accepted) and used in
// the following cycle, when that hash's first round runs; the register is
// this design's own choice. sel_i and the RAM data are for the current cycle;
// din_o is combinational.
module lyra2_feed
  import lyra2_pkg::*;
(
  input  logic             clk,
  input  logic             load_pwd_i,
  input  logic [H_W-1:0]   pwd_i,
  input  feed_sel_e        sel_i,
  input  block_t           qa_i,
  input  block_t           qb_i,
  output block_t           din_o
);

  logic [H_W-1:0] pwd_q;
  block_t         sum;

  always_ff @(posedge clk) begin
    if (load_pwd_i) pwd_q <= pwd_i;
  end

  for (genvar w = 0; w < B_WDS; w++) begin : g_add
    assign sum[w*WORD_W +: WORD_W] = qa_i[w*WORD_W +: WORD_W] + qb_i[w*WORD_W +: WORD_W];
  end

  assign din_o = (sel_i == FEED_PWD) ? {{(B_W-2*H_W){1'b0}}, pwd_q, pwd_q} : sum;

endmodule
