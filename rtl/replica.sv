// replica -- one replica of the sparsified Ising graph.
//
// Holds N = 2L p-bits wired according to the sparse graph of pt_pkg (each
// p-bit sees only its incident edge weights and neighbour states), plus:
//   * colour enables: a one-hot register of NCOLOR = 3 bits, rotating once per
//     cycle while en_sweep is high; a p-bit updates when en_sweep and its
//     group's bit are set, so a full Monte Carlo sweep takes 3 cycles;
//   * energy accumulator (stride D) giving E = 2 * beta * H (4 fraction bits);
//   * infeasibility counter g (copy disagreements), registered on en_inf;
//   * best-state tracker, updated on the first cycle of each beta-swap phase.
// All p-bits of the replica load the neighbour replica's state vector in the
// same cycle when a swap bit is set (swap[0] beta-1, [1] beta+1, [2] P-1,
// [3] P+1).
//
// J holds the replica's E = L(L-1)/2 + L edge weights (beta-scaled, copy
// edges last) and h its N biases; both are supplied already multiplied by the
// replica's beta, so no multiplication by beta happens on chip.
// Each p-bit LFSR is seeded from ID*N + p.
module replica #(
  parameter int L   = 16,
  parameter int D   = 8,
  parameter int ID  = 0,
  parameter int N   = 2 * L,
  parameter int E   = pt_pkg::num_edges(L),
  parameter int WEL = pt_pkg::we_local(pt_pkg::max_degree(L)),
  parameter int WE  = WEL + $clog2(N),
  parameter int WG  = $clog2(N / 2 + 1)
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         rst_best,
  input  pt_pkg::pt_ctrl_t             ctrl,
  input  logic signed [pt_pkg::WJ-1:0] j [E],
  input  logic signed [pt_pkg::WH-1:0] h [N],
  input  logic [3:0]                   swap,
  input  logic [N-1:0]                 m_bm1,
  input  logic [N-1:0]                 m_bp1,
  input  logic [N-1:0]                 m_pm1,
  input  logic [N-1:0]                 m_pp1,
  output logic [N-1:0]                 m,
  output logic signed [WE-1:0]         energy,
  output logic [WG-1:0]                g,
  output logic signed [WE-1:0]         best_e,
  output logic [N-1:0]                 best_s
);
  import pt_pkg::*;

  logic [NCOLOR-1:0]     color_oh;
  logic signed [WEL-1:0] e_loc [N];
  logic                  en_b_d;

  always_ff @(posedge clk) begin
    if (rst) begin
      color_oh <= NCOLOR'(1);
      en_b_d   <= 1'b0;
    end else begin
      en_b_d <= ctrl.en_b;
      if (ctrl.en_sweep) color_oh <= {color_oh[NCOLOR-2:0], color_oh[NCOLOR-1]};
    end
  end

  for (genvar p = 0; p < N; p++) begin : g_pbit
    localparam int DEG = degree(L, p);
    localparam int COL = color_of(L, p);
    logic signed [WJ-1:0] j_nbr [DEG];
    logic                 m_nbr [DEG];
    logic [WI-1:0]        i_unused;
    for (genvar k = 0; k < DEG; k++) begin : g_nbr
      assign j_nbr[k] = j[nbr_edge(L, p, k)];
      assign m_nbr[k] = m[nbr_node(L, p, k)];
    end
    pbit #(.DEG(DEG), .WEL(WEL), .SEED(seed_of(ID * N + p))) u_pbit (
      .clk(clk), .rst(rst),
      .en(ctrl.en_sweep & color_oh[COL]),
      .swap(swap),
      .m_swap({m_pp1[p], m_pm1[p], m_bp1[p], m_bm1[p]}),
      .j_nbr(j_nbr), .m_nbr(m_nbr), .h(h[p]),
      .m(m[p]), .e_loc(e_loc[p]), .i_field(i_unused));
  end

  energy_acc #(.N(N), .D(D), .WEL(WEL), .WE(WE)) u_acc (
    .clk(clk), .rst(rst), .en_acc(ctrl.en_acc), .e_in(e_loc), .energy(energy));

  infeasibility #(.N(N), .WG(WG)) u_inf (
    .clk(clk), .rst(rst), .en(ctrl.en_inf), .m(m), .g(g));

  best_state #(.N(N), .WE(WE)) u_best (
    .clk(clk), .rst(rst), .rst_best(rst_best), .upd(ctrl.en_b & ~en_b_d),
    .energy(energy), .state(m), .best_e(best_e), .best_s(best_s));
endmodule
