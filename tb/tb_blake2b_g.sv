// tb_blake2b_g: checks the G-function against the reference, both the
// combinational form (default) and a form with a register after every step
// (latency 4 cycles, checked by streaming one vector per cycle).
module tb_blake2b_g;
  import lyra2_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  w64_t a, b, c, d;
  w64_t ca, cb, cc, cd;
  w64_t pa, pb, pc, pd;
  w64_t ea, eb, ec, ed;
  w64_t hist [$];

  blake2b_g u_comb (.clk, .a_i(a), .b_i(b), .c_i(c), .d_i(d),
                    .a_o(ca), .b_o(cb), .c_o(cc), .d_o(cd));
  blake2b_g #(.REG_AFTER(4'b1111)) u_pipe (.clk, .a_i(a), .b_i(b), .c_i(c), .d_i(d),
                    .a_o(pa), .b_o(pb), .c_o(pc), .d_o(pd));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      if (n < 2) {a, b, c, d} = '0;
      else {a, b, c, d} = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      #1;
      g4(a, b, c, d, ea, eb, ec, ed);
      checks++;
      if ({ca, cb, cc, cd} !== {ea, eb, ec, ed}) begin
        failures++;
        if (failures < 5) $display("comb mismatch n=%0d", n);
      end
      hist.push_back(ea); hist.push_back(eb); hist.push_back(ec); hist.push_back(ed);
      if (n >= 4) begin
        // output now = input of 4 cycles ago
        checks++;
        if ({pa, pb, pc, pd} !== {hist[0], hist[1], hist[2], hist[3]}) begin
          failures++;
          if (failures < 5) $display("pipe mismatch n=%0d", n);
        end
        repeat (4) void'(hist.pop_front());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
