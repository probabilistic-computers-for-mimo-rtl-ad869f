// lfsr32 -- 32-bit Galois linear feedback shift register.
//
// Every p-bit and every swap controller owns one of these as its random
// source. The register shifts right by one each clock cycle, whether or not
// its user is enabled; when the bit shifted out is 1 the feedback mask is XORed
// in. The mask 32'h8020_0003 (bits 31, 21, 1, 0) implements the XAPP052
// maximal-length polynomial x^32 + x^22 + x^2 + x + 1, so the period is
// 2^32 - 1 and the all-zero state is never reached from a non-zero seed.
// The source lists the taps as "31, 21, 2 and 1" with a period of 2^32-1;
// read as 0-based bit positions those four taps do not give a maximal sequence,
// so the taps here are the 0-based form of XAPP052's 32, 22, 2, 1.
//
// Interface: rst loads SEED (synchronous); r is the current state.
// Timing: r advances on every rising clock edge.
module lfsr32 #(
  parameter logic [31:0] SEED = 32'h1
) (
  input  logic        clk,
  input  logic        rst,
  output logic [31:0] r
);
  localparam logic [31:0] MASK = 32'h8020_0003;

  always_ff @(posedge clk) begin
    if (rst) r <= (SEED == 32'd0) ? 32'd1 : SEED;
    else     r <= (r >> 1) ^ (r[0] ? MASK : 32'd0);
  end
endmodule
