// tb_lyra2_writeback: checks the two write-back XOR blocks with random data:
// wdata0 = rand ^ qc, wdata1 = rand rotated up by one 64-bit word ^ qd, and
// on a row collision wdata1 = rotated rand ^ wdata0. The rotation is
// computed word by word here: word i of the rotated block is word (i+11)%12.
module tb_lyra2_writeback;
  import lyra2_pkg::*;

  int checks = 0, failures = 0;
  block_t r, qc, qd, w0, w1, rot, e0, e1;
  logic col;

  lyra2_writeback u_dut (.rand_i(r), .qc_i(qc), .qd_i(qd), .collide_i(col),
                         .wdata0_o(w0), .wdata1_o(w1));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 400; n++) begin
      for (int i = 0; i < 24; i++) begin
        r[32*i +: 32] = $urandom; qc[32*i +: 32] = $urandom; qd[32*i +: 32] = $urandom;
      end
      col = (n % 3 == 0);
      #1;
      for (int w = 0; w < 12; w++) rot[64*w +: 64] = r[64*((w + 11) % 12) +: 64];
      e0 = r ^ qc;
      e1 = col ? (rot ^ r ^ qc) : (rot ^ qd);
      checks += 2;
      if (w0 !== e0) failures++;
      if (w1 !== e1) begin
        failures++;
        if (failures < 5) $display("wdata1 mismatch n=%0d collide=%0d", n, col);
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
