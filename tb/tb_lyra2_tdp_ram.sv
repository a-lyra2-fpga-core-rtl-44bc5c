// tb_lyra2_tdp_ram: random reads and writes on both ports of the two-port
// RAM (default 768 x 130), checked against an array model. A port's output
// must show the addressed word after a read and keep its value on a write.
module tb_lyra2_tdp_ram;
  localparam int W = 768, D = 130, AW = 8;
  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic en_a, we_a, en_b, we_b;
  logic [AW-1:0] ad_a, ad_b;
  logic [W-1:0] di_a, di_b, do_a, do_b;
  logic [W-1:0] model [D];
  logic [W-1:0] exp_a, exp_b;
  logic [D-1:0] written;

  lyra2_tdp_ram u_dut (.clk, .en_a, .we_a, .addr_a(ad_a), .din_a(di_a), .dout_a(do_a),
                       .en_b, .we_b, .addr_b(ad_b), .din_b(di_b), .dout_b(do_b));

  function automatic logic [W-1:0] rnd_word();
    logic [W-1:0] x;
    for (int i = 0; i < W / 32; i++) x[32*i +: 32] = $urandom;
    return x;
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    written = '0;
    {en_a, we_a, en_b, we_b} = '0;
    exp_a = '0; exp_b = '0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      en_a = $urandom_range(0, 3) != 0;
      en_b = $urandom_range(0, 3) != 0;
      we_a = (n < 400) ? 1'b1 : ($urandom_range(0, 2) == 0);
      we_b = (n < 400) ? 1'b1 : ($urandom_range(0, 2) == 0);
      ad_a = AW'($urandom_range(0, D - 1));
      ad_b = AW'($urandom_range(0, D - 1));
      if (ad_a == ad_b && we_a && we_b) ad_b = AW'((ad_a + 1) % D);
      di_a = rnd_word();
      di_b = rnd_word();
      @(posedge clk); #1;
      // reads see the contents before this edge's writes (different ports
      // never read and write the same address here unless checked below)
      if (en_a && !we_a) exp_a = model[ad_a];
      if (en_b && !we_b) exp_b = model[ad_b];
      if (en_a && we_a) begin model[ad_a] = di_a; written[ad_a] = 1; end
      if (en_b && we_b) begin model[ad_b] = di_b; written[ad_b] = 1; end
      if ((en_a && !we_a && en_b && we_b && ad_a == ad_b) ||
          (en_b && !we_b && en_a && we_a && ad_a == ad_b)) begin
        // read and write of one address in one edge: result not checked
        exp_a = do_a; exp_b = do_b;
      end
      if (n >= 400) begin
        checks += 2;
        if (do_a !== exp_a) begin failures++; if (failures < 5) $display("port a mismatch n=%0d", n); end
        if (do_b !== exp_b) begin failures++; if (failures < 5) $display("port b mismatch n=%0d", n); end
      end else begin
        exp_a = do_a; exp_b = do_b;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
