// lyra2_tdp_ram: a standard true dual-port block RAM, one clock.
//
// Each of the two ports reads or writes one word per clock edge when its
// enable is high. Reads are synchronous: dout_x shows mem[addr_x] after the
// edge. During a write the port's dout holds its old value ("no change"
// mode), so a port's output changes only on its reads. Writing the same
// address from both ports in one edge is not allowed (assertion). No reset;
// contents start undefined, as in a block RAM without initialisation. The
// paper only names this part ("standard two-port BRAMs").
module lyra2_tdp_ram #(
  parameter int unsigned WIDTH = 768,
  parameter int unsigned DEPTH = 130,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             en_a,
  input  logic             we_a,
  input  logic [AW-1:0]    addr_a,
  input  logic [WIDTH-1:0] din_a,
  output logic [WIDTH-1:0] dout_a,
  input  logic             en_b,
  input  logic             we_b,
  input  logic [AW-1:0]    addr_b,
  input  logic [WIDTH-1:0] din_b,
  output logic [WIDTH-1:0] dout_b
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en_a && we_a) mem[addr_a] <= din_a;
    if (en_b && we_b) mem[addr_b] <= din_b;
  end

  always_ff @(posedge clk) begin
    if (en_a && !we_a) dout_a <= mem[addr_a];
    if (en_b && !we_b) dout_b <= mem[addr_b];
  end

  always_ff @(posedge clk) begin
    assert (!(en_a && we_a && en_b && we_b && addr_a == addr_b))
      else $error("lyra2_tdp_ram: both ports write address %0d", addr_a);
  end

endmodule
