// tb_lyra2_feed: checks the duplex input multiplexer: the word-wise sum of
// qa and qb (no carry between 64-bit words, including words chosen to
// overflow), and the 0 || pwd || pwd vector from the password register,
// which must hold the value loaded one or more cycles before.
module tb_lyra2_feed;
  import lyra2_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic load;
  logic [H_W-1:0] pwd, pwd_m;
  feed_sel_e sel;
  block_t qa, qb, din, exp_v;

  lyra2_feed u_dut (.clk, .load_pwd_i(load), .pwd_i(pwd), .sel_i(sel),
                    .qa_i(qa), .qb_i(qb), .din_o(din));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    load = 1;
    for (int i = 0; i < 8; i++) pwd[32*i +: 32] = $urandom;
    @(posedge clk); #1;
    pwd_m = pwd;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      for (int i = 0; i < 24; i++) begin qa[32*i +: 32] = $urandom; qb[32*i +: 32] = $urandom; end
      if (n % 7 == 0) begin qa = '1; qb = {12{64'd1}}; end  // every word wraps to 0
      sel  = ($urandom_range(0, 1) == 1) ? FEED_PWD : FEED_SUM;
      load = ($urandom_range(0, 3) == 0);
      for (int i = 0; i < 8; i++) pwd[32*i +: 32] = $urandom;
      #1;
      if (sel == FEED_PWD) exp_v = {256'b0, pwd_m, pwd_m};
      else for (int w = 0; w < 12; w++) exp_v[64*w +: 64] = qa[64*w +: 64] + qb[64*w +: 64];
      checks++;
      if (din !== exp_v) begin
        failures++;
        if (failures < 5) $display("mismatch n=%0d sel=%0d", n, sel);
      end
      @(posedge clk); #1;
      if (load) pwd_m = pwd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
