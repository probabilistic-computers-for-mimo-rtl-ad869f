// bram_dp -- true dual-port block RAM, one port per clock domain.
//
// Port A serves the host side, port B the PT side, as with the J, h and
// decoded-state memories of the design. Each port writes DW-bit words when
// its we is high and returns the word at its address one cycle after the
// address is presented (registered read, read-before-write on the same port).
// Writing the same address from both ports in the same cycle is not allowed.
// Lint reports the memory array as driven from two clocked blocks with
// different clocks: that is what a true dual-port RAM is, and synthesis maps
// it to a memory with two write ports, not to flip-flops with two drivers.
// In this design only the host port A of the J and h memories and port B of
// the state memory ever write.
// The contents start at zero. DEPTH is the number of words used; the array
// covers all 2^AW addresses.
module bram_dp #(
  parameter int DW    = 32,
  parameter int DEPTH = 1024,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk_a,
  input  logic          we_a,
  input  logic [AW-1:0] addr_a,
  input  logic [DW-1:0] din_a,
  output logic [DW-1:0] dout_a,
  input  logic          clk_b,
  input  logic          we_b,
  input  logic [AW-1:0] addr_b,
  input  logic [DW-1:0] din_b,
  output logic [DW-1:0] dout_b
);
  // storage is rounded up to the full address range, as a block RAM is
  localparam int WORDS = 1 << AW;
  logic [DW-1:0] mem [WORDS];

  initial for (int k = 0; k < WORDS; k++) mem[k] = '0;

  always_ff @(posedge clk_a) begin
    if (we_a) mem[addr_a] <= din_a;
    dout_a <= mem[addr_a];
  end

  always_ff @(posedge clk_b) begin
    if (we_b) mem[addr_b] <= din_b;
    dout_b <= mem[addr_b];
  end
endmodule
