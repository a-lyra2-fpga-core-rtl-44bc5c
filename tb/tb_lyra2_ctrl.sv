// tb_lyra2_ctrl: checks the controller's schedule at the default eight
// pipeline stages. Three hashes are started (two back to back, one later)
// and lsw_i is random every cycle. For each hash and each of its 68 rounds
// the testbench works out, from the Lyra2 algorithm alone, which cells the
// round must read on qa/qb (issued one cycle before the round), on qc/qd
// (issued PIPE_STAGES-1 cycles later) and which it must write when its output
// appears, and compares them with the controller's outputs in exactly those
// cycles; it also checks the input select, the collision flag, the constant
// writes after reset, that nothing else is written, and that done_o comes
// 68*PIPE_STAGES cycles after acceptance. Cell codes: row*4+col inside the
// hash's region, -1 = zero block, -2 = pad(params).
module tb_lyra2_ctrl;
  import lyra2_pkg::*;

  localparam int P = 8;
  localparam int AW = 8;
  localparam int ZERO = P * 16, PARAM = P * 16 + 1;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, in_valid, in_ready, accept, collide, init_wr, done;
  logic [1:0] lsw;
  feed_sel_e fsel;
  logic [AW-1:0] raddr [4];
  logic we [2];
  logic [AW-1:0] waddr [2];

  lyra2_ctrl u_dut (.clk, .rst_n, .in_valid_i(in_valid), .in_ready_o(in_ready),
                    .accept_o(accept), .lsw_i(lsw), .feed_sel_o(fsel), .raddr_o(raddr),
                    .we_o(we), .waddr_o(waddr), .collide_o(collide),
                    .init_wr_o(init_wr), .done_o(done));

  int checks = 0, failures = 0;
  int nh = 0, cycle = 0, dones = 0, ncoll = 0;
  int acc [3];
  int slot [3];
  int row1 [3][4];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("cycle %0d: %s", cycle, what);
    end
  endtask

  function automatic int addr_of(input int code, input int s);
    if (code == -1) return ZERO;
    if (code == -2) return PARAM;
    return s * 16 + code;
  endfunction

  // expected cell codes for round k of a hash whose wander rows picked r1[]
  function automatic void expect_round(input int k, input int r1 [4],
      output int qa, output int qb, output int qc, output int qd,
      output int w0, output int w1, output bit coll);
    int col, row0, rr1;
    qa = -1; qb = -1; qc = -1; qd = -1; w0 = -3; w1 = -3; coll = 0;
    if (k == 12) qa = -2;
    if (k == 23) w0 = 3;
    if (k >= 24 && k < 28) begin col = k - 24; if (col < 3) w0 = 2 - col; end
    if (k >= 28 && k < 32) begin col = k - 28; qa = col; qc = col; w0 = 4 + 3 - col; end
    if (k >= 32 && k < 40) begin
      col = (k - 32) % 4; row0 = 2 + (k - 32) / 4;
      qa = (row0 - 2) * 4 + col; qb = (row0 - 1) * 4 + col;
      qc = (row0 - 1) * 4 + col; qd = (row0 - 2) * 4 + col;
      w0 = row0 * 4 + 3 - col;   w1 = (row0 - 2) * 4 + col;
    end
    if (k >= 40 && k < 56) begin
      col = (k - 40) % 4; row0 = (k - 40) / 4; rr1 = r1[row0];
      qa = rr1 * 4 + col; qb = ((row0 + 3) % 4) * 4 + col;
      qc = row0 * 4 + col; qd = rr1 * 4 + col;
      coll = (row0 == rr1);
      w0 = coll ? -3 : row0 * 4 + col; w1 = rr1 * 4 + col;
    end
    if (k == 56) qa = r1[3] * 4;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stimulus
  initial begin
    rst_n = 0; in_valid = 0; lsw = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;         // constants are written in this cycle
    in_valid = 1;
    wait (nh == 2);
    #1 in_valid = 0;
    repeat (200) @(posedge clk);
    #1 in_valid = 1;
    wait (nh == 3);
    #1 in_valid = 0;
  end

  always @(negedge clk) lsw = 2'($urandom_range(0, 3));

  always @(posedge clk) begin
    int qa, qb, qc, qd, w0, w1, d, k;
    bit coll, exp_we0, exp_we1, exp_coll, exp_pwd;
    if (rst_n) begin
      cycle++;
      if (cycle == 1) begin
        chk(init_wr && we[0] && we[1] && waddr[0] == ZERO && waddr[1] == PARAM && !in_ready,
            "constant write after reset");
      end else begin
        exp_we0 = 0; exp_we1 = 0; exp_coll = 0; exp_pwd = 0;
        for (int h = 0; h < nh; h++) begin
          d = cycle - acc[h];
          // writes of round k = d/P - 1, and the row picked by its output
          if (d % P == 0 && d / P >= 1 && d / P <= 68) begin
            k = d / P - 1;
            if (k == 23) begin
              slot[h] = (int'(waddr[0]) - 3) / 16;
              chk(we[0] && (int'(waddr[0]) - 3) % 16 == 0, "first Setup0 write");
            end
            if (k >= 39 && k <= 51 && (k - 39) % 4 == 0) row1[h][(k - 39) / 4] = int'(lsw);
            expect_round(k, row1[h], qa, qb, qc, qd, w0, w1, coll);
            if (w0 != -3) begin exp_we0 = 1; chk(we[0] && waddr[0] == AW'(addr_of(w0, slot[h])), $sformatf("write 0 of round %0d", k)); end
            if (w1 != -3) begin exp_we1 = 1; chk(we[1] && waddr[1] == AW'(addr_of(w1, slot[h])), $sformatf("write 1 of round %0d", k)); end
            if (coll) begin exp_coll = 1; ncoll++; end
            if (k == 67) begin chk(done, "done after 68 rounds"); dones++; end
          end
          // qa / qb of round k = d/P
          if (d % P == 0 && d / P <= 67) begin
            k = d / P;
            expect_round(k, row1[h], qa, qb, qc, qd, w0, w1, coll);
            chk(raddr[0] == AW'(addr_of(qa, slot[h])) && raddr[1] == AW'(addr_of(qb, slot[h])),
                $sformatf("qa/qb of round %0d", k));
          end
          // qc / qd of round k, issued P-1 cycles after qa / qb
          if (d >= P - 1 && (d - (P - 1)) % P == 0 && (d - (P - 1)) / P <= 67) begin
            k = (d - (P - 1)) / P;
            expect_round(k, row1[h], qa, qb, qc, qd, w0, w1, coll);
            chk(raddr[2] == AW'(addr_of(qc, slot[h])) && raddr[3] == AW'(addr_of(qd, slot[h])),
                $sformatf("qc/qd of round %0d", k));
          end
          if (d == 1) exp_pwd = 1;
        end
        chk(we[0] == exp_we0 && we[1] == exp_we1, "unexpected write enable");
        chk(collide == exp_coll, "collision flag");
        chk((fsel == FEED_PWD) == exp_pwd, "input select");
        if (accept) begin acc[nh] = cycle; nh++; end
        if (nh == 3 && cycle == acc[2] + 68 * P + 2) begin
          chk(dones == 3, "three hashes done");
          chk(ncoll > 0, "at least one collision");
          $display("collisions=%0d", ncoll);
          $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
          $finish;
        end
      end
    end
  end
endmodule
