// tanh_lut -- maps the clipped influence field I to a 32-bit update threshold.
//
// I is 7 bits two's complement with 3 fraction bits. The sign bit I[6] is
// split off and I[5:0] is negated when the sign is set, giving a 6-bit
// magnitude. Its lower 5 bits address a 32-entry ROM covering |I| in [0,4) in
// steps of 1/8; when the magnitude's MSB is set (|I| >= 4) the output saturates
// to ONE = 2^32-1. For a negative I the ROM word is two's-complement negated.
//
// ROM entry a holds round(2^32 * (1 + tanh(a/8)) / 2), i.e. the probability
// that the p-bit becomes 1 for a positive field (0.5 at I = 0, rising to 1),
// as the LUT curve in the block diagram shows. Negating it modulo 2^32 gives
// 2^32 - x, the probability for the mirrored negative field. The p-bit then
// sets m = 1 when the unsigned LFSR word r < prob, which realises
// m = sgn(tanh(I) - r') with r' uniform in [-1,1]. The source calls the
// negated word a "signed 32-bit output"; this design compares it unsigned,
// which is what makes the 0.5-to-1 curve and the negation agree.
// The field -8.0 (7'b1000000) has no 6-bit magnitude; the synapse clips to
// [-63/8, +63/8] so it never occurs.
//
// Interface: combinational, i_field in, prob out. The ROM is read from
// rtl/tanh_lut.hex (32 words).
module tanh_lut (
  input  logic [6:0]  i_field,
  output logic [31:0] prob
);
  logic [31:0] rom [32];
  initial $readmemh("rtl/tanh_lut.hex", rom);

  logic        sgn;
  logic [5:0]  mag;
  logic [31:0] pmag;

  always_comb begin
    sgn  = i_field[6];
    mag  = sgn ? 6'(-i_field[5:0]) : i_field[5:0];
    pmag = mag[5] ? 32'hFFFF_FFFF : rom[mag[4:0]];
    prob = sgn ? 32'(-pmag) : pmag;
  end
endmodule
