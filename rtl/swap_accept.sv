// swap_accept -- Metropolis acceptance stages shared by the beta and P swap
// controllers.
//
// Takes the registered log-probability delta (stage 1, formed by the
// controller) and
//   stage 2: registers exp_approx(delta) and float_mplus5(LFSR word);
//   stage 3: registers accept = ovf | (!udf & (expo_p > expo_r |
//            (expo_p == expo_r & mant_p >= mant_r))),
// i.e. accept when the approximated exp(delta) is at least the uniform random
// number, comparing exponents first and mantissas on a tie. Its LFSR runs
// freely with seed SEED.
//
// Interface: delta in, accept out two cycles later.
module swap_accept #(
  parameter int          WD   = 40,
  parameter logic [31:0] SEED = 32'h1
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic signed [WD-1:0] delta,
  output logic                 accept
);
  logic [31:0] r;
  logic [4:0]  ep, mp, er, mr;
  logic        ovf, udf;
  logic [4:0]  ep_q, mp_q, er_q, mr_q;
  logic        ovf_q, udf_q;

  lfsr32 #(.SEED(SEED)) u_lfsr (.clk(clk), .rst(rst), .r(r));
  exp_approx #(.WD(WD)) u_exp (.delta(delta), .expo(ep), .mant(mp), .ovf(ovf), .udf(udf));
  float_mplus5 #(.M(5)) u_flt (.r(r), .expo(er), .mant(mr));

  always_ff @(posedge clk) begin
    if (rst) begin
      {ep_q, mp_q, er_q, mr_q, ovf_q, udf_q} <= '0;
      accept <= 1'b0;
    end else begin
      ep_q <= ep;  mp_q <= mp;  er_q <= er;  mr_q <= mr;
      ovf_q <= ovf;  udf_q <= udf;
      accept <= ovf_q || (!udf_q && ((ep_q > er_q) || (ep_q == er_q && mp_q >= mr_q)));
    end
  end
endmodule
