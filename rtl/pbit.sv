// pbit -- probabilistic bit with swap-state injection.
//
// Holds one binary state m (1 = +1, 0 = -1). Its synapse forms the influence
// field I and local energy e from the neighbour states; the tanh table turns I
// into a 32-bit threshold, which is compared with the p-bit's own free-running
// LFSR: the candidate next state is (r < prob). The state register loads
//   * the neighbour replica's copy of this p-bit when one of the four swap
//     bits is set (swap[0] beta-1, swap[1] beta+1, swap[2] P-1, swap[3] P+1;
//     at most one is set at a time), else
//   * the comparator output when en (colour-group sweep enable) is set,
//   * otherwise it holds.
// Following the block diagram, the swap path takes priority over the sweep.
//
// Interface: see ports. Timing: one state update per enabled cycle; swap
// loads take effect at the clock edge on which the swap bit is high. rst
// clears the state to 0 and reseeds the LFSR with SEED.
module pbit #(
  parameter int          DEG  = 4,
  parameter int          WEL  = pt_pkg::we_local(DEG),
  parameter logic [31:0] SEED = 32'h1
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         en,
  input  logic [3:0]                   swap,
  input  logic [3:0]                   m_swap,   // states from the 4 neighbours
  input  logic signed [pt_pkg::WJ-1:0] j_nbr [DEG],
  input  logic                         m_nbr [DEG],
  input  logic signed [pt_pkg::WH-1:0] h,
  output logic                         m,
  output logic signed [WEL-1:0]        e_loc,
  output logic        [pt_pkg::WI-1:0] i_field
);
  logic [31:0] r, prob;
  logic        cmp;

  synapse #(.DEG(DEG), .WEL(WEL)) u_syn (
    .j_nbr(j_nbr), .m_nbr(m_nbr), .h(h), .m_self(m),
    .i_field(i_field), .e_loc(e_loc));

  tanh_lut u_tanh (.i_field(i_field), .prob(prob));

  lfsr32 #(.SEED(SEED)) u_lfsr (.clk(clk), .rst(rst), .r(r));

  assign cmp = (r < prob);

  always_ff @(posedge clk) begin
    if (rst)            m <= 1'b0;
    else if (|swap)     m <= |(swap & m_swap);
    else if (en)        m <= cmp;
  end
endmodule
