// synapse -- multiplier-free MAC and local energy of one p-bit.
//
// Each neighbour weight J_ij (10-bit, Q6.3) is passed unchanged when the
// neighbour state m_j = 1 and negated when m_j = 0 (the {0,1} state stands for
// -1/+1), so no multiplier is needed. The DEG signed operands are summed by a
// binary adder tree whose root is WJ + $clog2(DEG) bits. Two results leave
// the tree root in the same cycle, both combinational:
//   * influence field I = tree + h, saturated to 7 bits with 3 fraction bits;
//   * local energy e = -(+/-1)(tree + 2h), negated when the own state m_i = 1,
//     so that the sum of e over a replica is twice its Ising energy.
// The clip range is [-63, +63] in 1/8 units (one code short of the 7-bit
// minimum), so the tanh table never sees the magnitude-less code -64.
// Weights must lie in [-511, +511]: the conditional negation of -512 does not
// fit 10 bits, as in the published datapath.
//
// Interface: j_nbr/m_nbr are the DEG incident weights and neighbour states,
// h the bias, m_self the p-bit's own state. Outputs i_field and e_loc.
module synapse #(
  parameter int DEG = 4,
  parameter int WEL = pt_pkg::we_local(DEG)
) (
  input  logic signed [pt_pkg::WJ-1:0] j_nbr [DEG],
  input  logic                         m_nbr [DEG],
  input  logic signed [pt_pkg::WH-1:0] h,
  input  logic                         m_self,
  output logic        [pt_pkg::WI-1:0] i_field,
  output logic signed [WEL-1:0]        e_loc
);
  localparam int WJ = pt_pkg::WJ;
  localparam int WT = WJ + $clog2(DEG);
  localparam int WX = WT + 3;                     // headroom for tree + 2h
  localparam int IMAX = (1 << (pt_pkg::WI - 1)) - 1;

  logic signed [WJ-1:0] sel [DEG];
  logic signed [WT-1:0] tree;
  logic signed [WX-1:0] i_full, e_full;

  for (genvar k = 0; k < DEG; k++) begin : g_sel
    assign sel[k] = m_nbr[k] ? j_nbr[k] : -j_nbr[k];
  end

  adder_tree #(.N(DEG), .W(WJ)) u_tree (.in(sel), .sum(tree));

  always_comb begin
    i_full = WX'(tree) + WX'(h);
    if (i_full > WX'(IMAX))       i_field = pt_pkg::WI'(IMAX);
    else if (i_full < -WX'(IMAX)) i_field = pt_pkg::WI'(-IMAX);
    else                          i_field = i_full[pt_pkg::WI-1:0];
    e_full = WX'(tree) + (WX'(h) <<< 1);
    e_loc  = m_self ? WEL'(-e_full) : WEL'(e_full);
  end
endmodule
