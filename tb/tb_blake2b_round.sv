// tb_blake2b_round: streams random 1024-bit states through the round at its
// default eight-stage setting (seven internal registers, so the result of an
// input shows seven cycles later) and through a combinational instance, and
// compares both with the reference round.
module tb_blake2b_round;
  import lyra2_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [1023:0] x, y8, y1;
  logic [1023:0] exp_q [$];

  blake2b_round u_p8 (.clk, .state_i(x), .state_o(y8));
  blake2b_round #(.PIPE_STAGES(1)) u_p1 (.clk, .state_i(x), .state_o(y1));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      for (int i = 0; i < 32; i++) x[32*i +: 32] = $urandom;
      if (n == 0) x = '0;
      #1;
      exp_q.push_back(round_vec(x));
      checks++;
      if (y1 !== exp_q[$]) failures++;
      if (exp_q.size() == 8) begin
        checks++;
        if (y8 !== exp_q[0]) begin
          failures++;
          if (failures < 5) $display("pipelined mismatch at n=%0d", n);
        end
        void'(exp_q.pop_front());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
