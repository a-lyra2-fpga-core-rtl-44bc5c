// tb_lyra2_duplex: runs the duplex at its default eight-stage pipeline with
// random inputs and occasional state loads, and compares every round output
// with a model of the duplex loop: state(t+1) = load ? start state :
// round_out(t), round_out(t) = round(state(t-7) with din(t-7) xored into its
// lower 768 bits).
module tb_lyra2_duplex;
  import lyra2_pkg::*;
  import lyra2_ref_pkg::*;

  localparam int P = 8;
  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic load;
  block_t din;
  state_t rout;
  state_t st_m;              // model state register
  state_t pend [$];          // expected outputs, oldest first
  logic   known [$];

  lyra2_duplex u_dut (.clk, .load_init_i(load), .din_i(din), .round_o(rout));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic kn_state;
    kn_state = 0;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      load = (n < P) || ($urandom_range(0, 19) == 0);
      for (int i = 0; i < B_WDS * 2; i++) din[32*i +: 32] = $urandom;
      #1;
      pend.push_back(round_vec({st_m[STATE_W-1:B_W], st_m[B_W-1:0] ^ din}));
      known.push_back(kn_state);
      if (pend.size() == P) begin
        if (known[0]) begin
          checks++;
          if (rout !== pend[0]) begin
            failures++;
            if (failures < 5) $display("mismatch at n=%0d", n);
          end
        end
        // the state register takes this output, or the start state
        if (load) begin st_m = INIT_STATE; kn_state = 1; end
        else begin st_m = pend[0]; kn_state = known[0]; end
        void'(pend.pop_front());
        void'(known.pop_front());
      end else if (load) begin
        st_m = INIT_STATE; kn_state = 1;
      end
    end
    if (checks < 300) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
