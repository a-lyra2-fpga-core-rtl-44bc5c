// lyra2_writeback: the two parallel XOR blocks that form the RAM write data.
//
//   wdata0 = rand ^ qc                       (row0 update / new row)
//   wdata1 = (rand <<< 64) ^ (collide ? wdata0 : qd)   (row1 update)
// where rand is the lower b bits of the duplex round output. In the
// Wandering phase the pseudo-random row row1 can equal the deterministic row
// row0; the cell then must receive both updates in sequence, so the second
// XOR takes the first XOR's output instead of qd and the controller disables
// write port 0. The rotation by one word (omega = 64) is a left rotation of
// the 768-bit block, so word i of the rotated block is word i-1 of rand.
// All of this follows the paper; the block is combinational.
module lyra2_writeback
  import lyra2_pkg::*;
(
  input  block_t rand_i,
  input  block_t qc_i,
  input  block_t qd_i,
  input  logic   collide_i,
  output block_t wdata0_o,
  output block_t wdata1_o
);

  assign wdata0_o = rand_i ^ qc_i;
  assign wdata1_o = rot_w(rand_i) ^ (collide_i ? wdata0_o : qd_i);

endmodule
