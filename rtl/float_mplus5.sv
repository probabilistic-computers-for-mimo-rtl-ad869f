// float_mplus5 -- converts a 32-bit random word to a 5-bit exponent plus an
// M-bit mantissa so it can be compared directly with exp_approx's output.
//
// A leading-one detector finds the position q of the most significant set bit
// (priority: highest bit wins); r/2^32 lies in [2^(q-32), 2^(q-31)), so q is
// the exponent in the same biased form as exp_approx (2^(expo-32)). The
// mantissa is the M bits directly below the leading one, zero-filled when
// fewer exist. r = 0 gives expo = 0, mant = 0.
//
// Interface: combinational.
module float_mplus5 #(
  parameter int M = 5
) (
  input  logic [31:0]  r,
  output logic [4:0]   expo,
  output logic [M-1:0] mant
);
  logic [31:0] norm;

  always_comb begin
    expo = 5'd0;
    for (int i = 0; i < 32; i++) if (r[i]) expo = 5'(i);
    norm = r << (5'd31 - expo);        // leading one moved to bit 31
    mant = norm[30 -: M];
  end
endmodule
