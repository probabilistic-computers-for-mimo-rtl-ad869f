// exp_approx -- base-2 pseudo-float approximation of exp(delta) for delta <= 0.
//
// exp(x) = 2^(x log2 e) ~ 2^floor(y) * (1 + y - floor(y)) with y = 23/16 * x.
// The product 23*delta is formed without a multiplier as
// (delta<<4) + (delta<<2) + (delta<<1) + delta; dividing by 16 only moves the
// binary point. With delta carrying F fraction bits, k = floor(y) is the part
// above F+4 fraction bits and the top 5 fraction bits are the mantissa.
// Outputs: expo = k + 32 (5 bits, exp ~ 2^(expo-32) * (1 + mant/32)),
// ovf when delta >= 0 (exp >= 1, the swap is always accepted) and udf when
// k < -32 (exp is below the 5-bit exponent range, the swap is rejected).
//
// Interface: combinational.
module exp_approx #(
  parameter int WD = 40,
  parameter int F  = pt_pkg::DLT_FRAC
) (
  input  logic signed [WD-1:0] delta,
  output logic [4:0]           expo,
  output logic [4:0]           mant,
  output logic                 ovf,
  output logic                 udf
);
  localparam int WY = WD + 5;
  logic signed [WY-1:0] d, y23, k;

  always_comb begin
    d    = WY'(delta);
    y23  = (d <<< 4) + (d <<< 2) + (d <<< 1) + d;      // 23 * delta, F+4 fraction bits
    k    = y23 >>> (F + 4);                            // floor(23/16 * delta)
    mant = y23[F+3 -: 5];
    ovf  = (delta >= 0);
    udf  = !ovf && (k < -WY'(32));
    expo = 5'(k + WY'(32));
  end
endmodule
