// tb_lyra2_core: end-to-end test of the Lyra2 core at its default size
// (eight pipeline stages, eight hashes in flight). It hashes three fixed
// passwords with known results and a stream of random passwords, first with
// random gaps in in_valid, then back to back, and compares every K, in
// order, with the behavioural reference. It also checks the latency of every
// hash (68 rounds x PIPE_STAGES cycles from acceptance to the round that
// makes K, plus the output register) and the throughput of the back-to-back
// part, and counts the mechanisms of the design: input stalls, the
// Wandering-phase row collision (checked against the collisions the
// reference predicts), RAM reads of a cell written in the same cycle
// (write-before-read of the multipumped RAM), a slot taking a new hash in the
// cycle its previous hash finishes, and a full pipeline.
module tb_lyra2_core;
  import lyra2_ref_pkg::*;

  localparam int P       = 8;      // must match the core's PIPE_STAGES
  localparam int NHASH   = 27;
  localparam int LATENCY = 68 * P + 1;

  logic clk, clk2x, rst_n;
  initial begin
    clk = 0; clk2x = 0;
    forever begin
      clk = 1; clk2x = 1; #2;
      clk2x = 0; #2;
      clk2x = 1; clk = 0; #2;
      clk2x = 0; #2;
    end
  end

  logic         in_valid, in_ready, out_valid;
  logic [255:0] in_pwd, out_k;

  lyra2_core u_dut (.clk, .clk2x, .rst_n, .in_valid, .in_ready, .in_pwd,
                    .out_valid, .out_k);

  int checks = 0, failures = 0;
  logic [255:0] pwds [NHASH];
  logic [255:0] kexp [NHASH];
  int  acc_cycle [NHASH];
  int  n_acc = 0, n_out = 0, cycle = 0;
  int  stalls = 0, collisions = 0, exp_collisions = 0, raw = 0, reuse = 0;
  int  in_flight = 0, max_in_flight = 0;
  int  first_b2b_acc = -1;

  // known vectors (computed with an independent C model of Lyra2REv2's Lyra2)
  localparam logic [255:0] KV_PWD [3] = '{
    256'h0,
    256'h0404040404040404030303030303030302020202020202020101010101010101,
    256'he5923b2c9e4f7c78ed8b2178523c9ecff5bc0c9316e23946fdb56aaeeb575bdd};
  localparam logic [255:0] KV_K [3] = '{
    256'h678a45a4009b3720d36858e367efefe362ca3beb8c3dd1bb08bbc0b90391e7a7,
    256'h2ebe5d75aa2c8cb7967807b6ab989306bc73e034c6fe8308ee1e91d138178dc9,
    256'h4077ce42d33dcaf0e4f59d4c03d46e299fd3b2ffa1ffef1105bfa9807e22b5e0};

  initial begin
    repeat (NHASH * 68 * P + 4000) @(posedge clk);
    failures++;
    $display("watchdog: %0d of %0d results", n_out, NHASH);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // build the inputs and the expected results
  initial begin
    int rowa [4];
    for (int i = 0; i < NHASH; i++) begin
      if (i < 3) pwds[i] = KV_PWD[i];
      else for (int w = 0; w < 8; w++) pwds[i][32*w +: 32] = $urandom;
      kexp[i] = lyra2(pwds[i], rowa);
      for (int r = 0; r < 4; r++) if (rowa[r] == r) exp_collisions += 4;
      if (i < 3) begin
        checks++;
        if (kexp[i] !== KV_K[i]) begin
          failures++;
          $display("reference model disagrees with known vector %0d", i);
        end
      end
    end
  end

  // driver: random gaps for the first half, then back to back
  initial begin
    int idx;
    idx = 0;
    rst_n = 0; in_valid = 0; in_pwd = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    while (idx < NHASH) begin
      in_valid = (idx >= NHASH / 2) || ($urandom_range(0, 2) == 0);
      in_pwd   = pwds[idx];
      @(posedge clk);
      if (in_valid && in_ready) idx++;
      #1;
    end
    in_valid = 0;
  end

  // monitor: everything is sampled at the clock edge
  always @(posedge clk) begin
    if (rst_n) begin
      cycle++;
      if (u_dut.u_ctrl.done_o) in_flight--;   // K is in the round output now
      if (in_valid && !in_ready) stalls++;
      if (in_valid && in_ready) begin
        acc_cycle[n_acc] = cycle;
        if (n_acc == NHASH / 2) first_b2b_acc = cycle;
        if (u_dut.u_ctrl.done_o) reuse++;
        n_acc++;
        in_flight++;
      end
      if (u_dut.u_ctrl.collide_o) collisions++;
      for (int k = 0; k < 2; k++)
        for (int j = 0; j < 4; j++)
          if (u_dut.u_ctrl.we_o[k] && u_dut.u_ctrl.waddr_o[k] == u_dut.u_ctrl.raddr_o[j]) raw++;
      if (out_valid) begin
        checks++;
        if (out_k !== kexp[n_out]) begin
          failures++;
          $display("K mismatch for hash %0d: got %h expected %h", n_out, out_k, kexp[n_out]);
        end
        checks++;
        if (cycle - acc_cycle[n_out] != LATENCY) begin
          failures++;
          $display("hash %0d latency %0d, expected %0d", n_out, cycle - acc_cycle[n_out], LATENCY);
        end
        n_out++;
        if (n_out == NHASH) begin
          // back-to-back part: NHASH - NHASH/2 hashes, P per 68*P cycles
          checks++;
          if (acc_cycle[NHASH-1] - first_b2b_acc > ((NHASH - NHASH / 2 + P - 1) / P) * 68 * P) begin
            failures++;
            $display("throughput too low");
          end
          $display("stalls=%0d collisions=%0d (expected %0d) write-before-read=%0d slot_reuse=%0d max_in_flight=%0d",
                   stalls, collisions, exp_collisions, raw, reuse, max_in_flight);
          checks++; if (stalls == 0) begin failures++; $display("no stall happened"); end
          checks++; if (collisions == 0 || collisions != exp_collisions) begin failures++; $display("collision count wrong"); end
          checks++; if (raw == 0) begin failures++; $display("no write-before-read happened"); end
          checks++; if (reuse == 0) begin failures++; $display("no slot reuse happened"); end
          checks++; if (max_in_flight != P) begin failures++; $display("pipeline never full"); end
          $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
          $finish;
        end
      end
      if (in_flight > max_in_flight) max_in_flight = in_flight;
    end
  end
endmodule
