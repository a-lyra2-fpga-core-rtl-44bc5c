// tb_lyra2_mpram: drives the 4-read / 2-write multipumped RAM from the core
// clock with a phase-aligned clk2x, with random writes on both ports and four
// random reads each cycle. Reads presented in a cycle must return, in the
// next cycle, the contents after that same cycle's writes; a share of the
// reads is aimed at the addresses being written to check that ordering.
// Stimulus changes 1 ns after a clk edge; outputs are sampled after the
// clk2x edge in the middle of the following cycle.
module tb_lyra2_mpram;
  localparam int W = 768, D = 130, AW = 8;
  logic clk, clk2x;

  initial begin
    clk = 0; clk2x = 0;
    forever begin
      clk = 1; clk2x = 1; #2;
      clk2x = 0; #2;
      clk2x = 1; clk = 0; #2;
      clk2x = 0; #2;
    end
  end

  int checks = 0, failures = 0, raw_hits = 0;
  logic [AW-1:0] raddr [4];
  logic          we    [2];
  logic [AW-1:0] waddr [2];
  logic [W-1:0]  wdata [2];
  logic [W-1:0]  q     [4];
  logic [W-1:0]  model [D];
  logic [W-1:0]  exp_q [4];

  lyra2_mpram u_dut (.clk, .clk2x, .raddr_i(raddr), .we_i(we), .waddr_i(waddr),
                     .wdata_i(wdata), .q_o(q));

  function automatic logic [W-1:0] rnd_word();
    logic [W-1:0] x;
    for (int i = 0; i < W / 32; i++) x[32*i +: 32] = $urandom;
    return x;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill the memory so every read has a defined model value
    for (int a = 0; a < D; a += 2) begin
      @(posedge clk); #1;
      we[0] = 1; we[1] = (a + 1 < D);
      waddr[0] = AW'(a); waddr[1] = AW'(a + 1);
      wdata[0] = rnd_word(); wdata[1] = rnd_word();
      for (int k = 0; k < 4; k++) raddr[k] = '0;
      model[a] = wdata[0];
      if (a + 1 < D) model[a + 1] = wdata[1];
    end
    @(posedge clk); #1;
    for (int n = 0; n < 2000; n++) begin
      we[0] = $urandom_range(0, 1);
      we[1] = $urandom_range(0, 1);
      waddr[0] = AW'($urandom_range(0, D - 1));
      waddr[1] = AW'($urandom_range(0, D - 1));
      if (waddr[1] == waddr[0]) waddr[1] = AW'((waddr[0] + 1) % D);
      wdata[0] = rnd_word(); wdata[1] = rnd_word();
      for (int k = 0; k < 4; k++) begin
        case ($urandom_range(0, 3))
          0: raddr[k] = waddr[0];
          1: raddr[k] = waddr[1];
          default: raddr[k] = AW'($urandom_range(0, D - 1));
        endcase
      end
      if (we[0]) model[waddr[0]] = wdata[0];
      if (we[1]) model[waddr[1]] = wdata[1];
      for (int k = 0; k < 4; k++) begin
        exp_q[k] = model[raddr[k]];
        if ((we[0] && raddr[k] == waddr[0]) || (we[1] && raddr[k] == waddr[1])) raw_hits++;
      end
      @(posedge clk); #5;   // data valid after mid-cycle of the next cycle
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (q[k] !== exp_q[k]) begin
          failures++;
          if (failures < 5) $display("port %0d mismatch n=%0d", k, n);
        end
      end
      // second cycle: no writes, so the next round starts clean
      we[0] = 0; we[1] = 0;
      @(posedge clk); #1;
    end
    if (raw_hits < 100) failures++;
    $display("read-after-write hits: %0d", raw_hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
