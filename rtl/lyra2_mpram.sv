// lyra2_mpram: the 4-read / 2-write memory of the Lyra2 core, built as the
// paper describes from two replicated two-port block RAMs (lyra2_tdp_ram)
// clocked at twice the core clock (multipumping).
//
// Both copies receive both writes, so they stay identical (replication).
// Every core cycle spans two clk2x edges. On the clk2x edge that coincides
// with the core clock edge, the two ports of each copy perform write 0 and
// write 1 of the core cycle that just ended, and the read addresses of that
// cycle are captured. On the clk2x edge in the middle of the next core cycle
// the same ports read: copy 0 serves qa and qb, copy 1 serves qc and qd.
// Seen from the core clock this is a RAM with four synchronous read ports and
// two write ports, one cycle read latency and write-before-read ordering:
// a read presented in cycle n returns, in cycle n+1, data that include the
// writes presented in cycle n. The core relies on that ordering when a row
// is read right after it was written. clk2x must be phase aligned with clk
// (rising edges of clk coincide with rising edges of clk2x). The phase is
// recovered by a toggle flop in the clk domain compared with its copy in the
// clk2x domain. The order of writes before reads and the phase detector are
// this design's own choices; the paper gives the method (replication plus
// multipumping, after LaForest and Steffan) but not the circuit.
// Writing one address through both write ports in one cycle is not allowed.
module lyra2_mpram #(
  parameter int unsigned WIDTH = 768,
  parameter int unsigned DEPTH = 130,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             clk2x,
  input  logic [AW-1:0]    raddr_i [4],  // qa, qb, qc, qd
  input  logic             we_i    [2],
  input  logic [AW-1:0]    waddr_i [2],
  input  logic [WIDTH-1:0] wdata_i [2],
  output logic [WIDTH-1:0] q_o     [4]
);

  logic tog;     // toggles every core cycle
  logic tog_2x;  // its copy, sampled on clk2x
  logic wr_phase;

  always_ff @(posedge clk) tog <= ~tog;
  always_ff @(posedge clk2x) tog_2x <= tog;

  // Equal just before a clk2x edge that coincides with a clk edge.
  assign wr_phase = (tog == tog_2x);

  logic [AW-1:0] raddr_q [4];
  always_ff @(posedge clk2x) begin
    if (wr_phase) raddr_q <= raddr_i;
  end

  for (genvar k = 0; k < 2; k++) begin : g_copy
    lyra2_tdp_ram #(.WIDTH(WIDTH), .DEPTH(DEPTH), .AW(AW)) u_bram (
      .clk   (clk2x),
      .en_a  (wr_phase ? we_i[0] : 1'b1),
      .we_a  (wr_phase),
      .addr_a(wr_phase ? waddr_i[0] : raddr_q[2*k]),
      .din_a (wdata_i[0]),
      .dout_a(q_o[2*k]),
      .en_b  (wr_phase ? we_i[1] : 1'b1),
      .we_b  (wr_phase),
      .addr_b(wr_phase ? waddr_i[1] : raddr_q[2*k+1]),
      .din_b (wdata_i[1]),
      .dout_b(q_o[2*k+1])
    );
  end

  always_ff @(posedge clk) begin
    assert (!(we_i[0] && we_i[1] && waddr_i[0] == waddr_i[1]))
      else $error("lyra2_mpram: both write ports address %0d", waddr_i[0]);
  end

endmodule
