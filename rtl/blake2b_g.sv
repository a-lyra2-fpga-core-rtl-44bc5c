// blake2b_g: the BLAKE2b G-function in the form Lyra2 uses it (no message
// words are added), with optional pipeline registers.
//
// G updates four 64-bit words a, b, c, d in four steps, each an addition
// followed by an xor and a right rotation:
//   step 0: a += b; d = (d ^ a) >>> 32
//   step 1: c += d; b = (b ^ c) >>> 24
//   step 2: a += b; d = (d ^ a) >>> 16
//   step 3: c += d; b = (b ^ c) >>> 63
// These steps are those of the paper's Algorithm 1. Bit i of REG_AFTER puts
// a register on all four words after step i, so the latency is the number of
// bits set in REG_AFTER cycles (0 = purely combinational; clk is then
// unused). Where the
// registers go is this design's own choice; the paper only gives the number
// of stages per round (see blake2b_round). No reset: the registers carry data
// only.
module blake2b_g
  import lyra2_pkg::*;
#(
  parameter logic [3:0] REG_AFTER = 4'b0000
) (
  input  logic  clk,
  input  word_t a_i, b_i, c_i, d_i,
  output word_t a_o, b_o, c_o, d_o
);

  localparam int unsigned ROT [4] = '{32, 24, 16, 63};

  // g_step[s] takes the words left by step s-1 and produces o*
  for (genvar s = 0; s < 4; s++) begin : g_step
    word_t ia, ib, ic, id;   // words entering step s
    word_t na, nb, nc, nd;   // after the step
    word_t oa, ob, oc, od;   // after the optional register
    if (s == 0) begin : g_in
      assign ia = a_i;
      assign ib = b_i;
      assign ic = c_i;
      assign id = d_i;
    end else begin : g_in
      assign ia = g_step[s-1].oa;
      assign ib = g_step[s-1].ob;
      assign ic = g_step[s-1].oc;
      assign id = g_step[s-1].od;
    end
    if (s % 2 == 0) begin : g_ad
      assign na = ia + ib;
      assign nd = rotr64(id ^ na, ROT[s]);
      assign nb = ib;
      assign nc = ic;
    end else begin : g_cb
      assign nc = ic + id;
      assign nb = rotr64(ib ^ nc, ROT[s]);
      assign na = ia;
      assign nd = id;
    end
    if (REG_AFTER[s]) begin : g_reg
      always_ff @(posedge clk) begin
        oa <= na;
        ob <= nb;
        oc <= nc;
        od <= nd;
      end
    end else begin : g_comb
      assign oa = na;
      assign ob = nb;
      assign oc = nc;
      assign od = nd;
    end
  end

  assign a_o = g_step[3].oa;
  assign b_o = g_step[3].ob;
  assign c_o = g_step[3].oc;
  assign d_o = g_step[3].od;

endmodule
