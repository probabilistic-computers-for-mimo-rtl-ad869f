// pt_core -- two-dimensional parallel-tempering core (one column = 1D-PT).
//
// An R x C array of replicas: row r has inverse temperature beta_r (row 0 the
// hottest), column c has copy strength P_c (column 0 the weakest). beta and P
// enter only through the host-written weights (beta_r*J, beta_r*h, copy
// edges beta_r*P_c) and through the swap factors, which are computed at
// elaboration from BETA_M and P_M (thousandths).
//
// Contents:
//   * pt_fsm and a ctrl_pipe of depth ceil(log2(R*C))+1 feeding all replicas
//     and swap controllers with the same delayed control bundle;
//   * floor(R/2)*C swap_beta controllers, controller k of column c serving rows
//     2k, 2k+1, 2k+2; R*floor(C/2) swap_constraint controllers, controller k
//     of row r serving columns 2k, 2k+1, 2k+2;
//   * neighbour wiring: replica (r,c) sees the states of (r-1,c), (r+1,c),
//     (r,c-1), (r,c+1); at the array edge the neighbour state and the swap bit
//     are tied to 0. An accepted pair exchanges states by asserting the
//     matching swap bit in both replicas in the same cycle;
//   * readout register: on rd_start the best states of the strongest-P column
//     (c = C-1; all R replicas of the single column in 1D-PT) are latched as
//     {best(0), best(1), .., best(R-1)}, zero-padded at the low end to NW 32-bit
//     words, and shifted out MSB-first, one word per cycle with s_valid high.
//
// Replica index rep = r*C + c selects its slice of j_all/h_all; LFSR seeds
// are derived from rep and, for the controllers, from a separate range.
// idle is high when the FSM is idle and the control pipeline has drained.
module pt_core #(
  parameter int L              = 16,
  parameter int R              = 9,
  parameter int C              = 6,
  parameter int D              = 8,
  parameter int BETA_M [R]     = pt_pkg::BETA_MIMO16_M,
  parameter int P_M    [C]     = pt_pkg::P_MIMO16_M,
  parameter int N              = 2 * L,
  parameter int E              = pt_pkg::num_edges(L),
  parameter int NW             = (R * N + 31) / 32,
  parameter int PIPE           = $clog2(R * C) + 1
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         en,
  input  logic [pt_pkg::SSR_W-1:0]     ssr,
  input  logic                         rst_best,
  input  logic signed [pt_pkg::WJ-1:0] j_all [R*C][E],
  input  logic signed [pt_pkg::WH-1:0] h_all [R*C][N],
  input  logic                         rd_start,
  output logic                         idle,
  output logic                         s_valid,
  output logic [31:0]                  s_word
);
  import pt_pkg::*;

  localparam int WEL  = we_local(max_degree(L));
  localparam int WE   = WEL + $clog2(N);
  localparam int WG   = $clog2(N / 2 + 1);
  localparam int NACC = (N + D - 1) / D + 1;
  localparam int RB   = (R > 1) ? R - 1 : 1;   // beta pairs per column
  localparam int CB   = (C > 1) ? C - 1 : 1;   // P pairs per row

  pt_ctrl_t  ctrl_fsm, ctrl;
  pt_state_e fsm_state;
  logic      fsm_idle, pipe_busy;

  pt_fsm #(.C(C), .NACC(NACC)) u_fsm (
    .clk(clk), .rst(rst), .en(en), .ssr(ssr),
    .ctrl(ctrl_fsm), .state(fsm_state), .idle(fsm_idle));

  ctrl_pipe #(.DEPTH(PIPE)) u_pipe (
    .clk(clk), .rst(rst), .d(ctrl_fsm), .q(ctrl), .busy(pipe_busy));

  assign idle = fsm_idle && !pipe_busy;

  // ------------------------------------------------------------ replicas
  logic [N-1:0]        m      [R][C];
  logic signed [WE-1:0] energy [R][C];
  logic [WG-1:0]        g      [R][C];
  logic signed [WE-1:0] best_e [R][C];
  logic [N-1:0]         best_s [R][C];
  logic                 pb     [C][RB];   // beta pair (r, r+1) of column c swaps
  logic                 pp     [R][CB];   // P pair (c, c+1) of row r swaps

  for (genvar r = 0; r < R; r++) begin : g_row
    for (genvar c = 0; c < C; c++) begin : g_col
      logic [3:0]   sw;
      logic [N-1:0] n_bm1, n_bp1, n_pm1, n_pp1;
      assign sw[SW_BM1] = (r > 0)     ? pb[c][(r > 0) ? r - 1 : 0] : 1'b0;
      assign sw[SW_BP1] = (r < R - 1) ? pb[c][(r < R - 1) ? r : 0] : 1'b0;
      assign sw[SW_PM1] = (c > 0)     ? pp[r][(c > 0) ? c - 1 : 0] : 1'b0;
      assign sw[SW_PP1] = (c < C - 1) ? pp[r][(c < C - 1) ? c : 0] : 1'b0;
      assign n_bm1 = (r > 0)     ? m[(r > 0) ? r - 1 : 0][c]     : '0;
      assign n_bp1 = (r < R - 1) ? m[(r < R - 1) ? r + 1 : 0][c] : '0;
      assign n_pm1 = (c > 0)     ? m[r][(c > 0) ? c - 1 : 0]     : '0;
      assign n_pp1 = (c < C - 1) ? m[r][(c < C - 1) ? c + 1 : 0] : '0;

      replica #(.L(L), .D(D), .ID(r * C + c), .N(N), .E(E),
                .WEL(WEL), .WE(WE), .WG(WG)) u_rep (
        .clk(clk), .rst(rst), .rst_best(rst_best), .ctrl(ctrl),
        .j(j_all[r*C+c]), .h(h_all[r*C+c]), .swap(sw),
        .m_bm1(n_bm1), .m_bp1(n_bp1), .m_pm1(n_pm1), .m_pp1(n_pp1),
        .m(m[r][c]), .energy(energy[r][c]), .g(g[r][c]),
        .best_e(best_e[r][c]), .best_s(best_s[r][c]));
    end
  end

  // ------------------------------------------------ beta swap controllers
  for (genvar c = 0; c < C; c++) begin : g_sb_col
    if (R == 1) begin : g_none
      assign pb[c][0] = 1'b0;
    end
    for (genvar k = 0; k < R / 2; k++) begin : g_sb
      localparam int  RA    = 2 * k;
      localparam bit  HAS_C = (2 * k + 2 < R);
      localparam int  RC    = HAS_C ? 2 * k + 2 : 2 * k + 1;
      logic [1:0] sw2;
      swap_beta #(
        .WE(WE),
        .MU0_EVEN(mu_beta0(BETA_M[RA], BETA_M[RA+1])),
        .MU1_EVEN(mu_beta1(BETA_M[RA], BETA_M[RA+1])),
        .MU0_ODD (HAS_C ? mu_beta0(BETA_M[RA+1], BETA_M[RC]) : 0),
        .MU1_ODD (HAS_C ? mu_beta1(BETA_M[RA+1], BETA_M[RC]) : 0),
        .HAS_C(HAS_C),
        .SEED(seed_of(R * C * N + c * R + k))) u_sb (
        .clk(clk), .rst(rst), .en(ctrl.en_b), .dir(ctrl.dir_b),
        .e_a(energy[RA][c]), .e_b(energy[RA+1][c]), .e_c(energy[RC][c]),
        .swap(sw2));
      assign pb[c][RA] = sw2[0];
      if (HAS_C) begin : g_odd
        assign pb[c][RA+1] = sw2[1];
      end
    end
  end

  // --------------------------------------------------- P swap controllers
  for (genvar r = 0; r < R; r++) begin : g_sp_row
    if (C == 1) begin : g_none
      assign pp[r][0] = 1'b0;
    end
    for (genvar k = 0; k < C / 2; k++) begin : g_sp
      localparam int  CA    = 2 * k;
      localparam bit  HAS_C = (2 * k + 2 < C);
      localparam int  CC    = HAS_C ? 2 * k + 2 : 2 * k + 1;
      logic [1:0] sw2;
      swap_constraint #(
        .WG(WG),
        .MU_EVEN(mu_p(BETA_M[r], P_M[CA], P_M[CA+1])),
        .MU_ODD (HAS_C ? mu_p(BETA_M[r], P_M[CA+1], P_M[CC]) : 0),
        .HAS_C(HAS_C),
        .SEED(seed_of(R * C * N + R * C + r * C + k))) u_sp (
        .clk(clk), .rst(rst), .en(ctrl.en_p), .dir(ctrl.dir_p),
        .g_a(g[r][CA]), .g_b(g[r][CA+1]), .g_c(g[r][CC]),
        .swap(sw2));
      assign pp[r][CA] = sw2[0];
      if (HAS_C) begin : g_odd
        assign pp[r][CA+1] = sw2[1];
      end
    end
  end

  // --------------------------------------------------- readout register
  localparam int RDW = NW * 32;
  logic [RDW-1:0]          rd_sr;
  logic [$clog2(NW+1)-1:0] rd_cnt;
  logic [R*N-1:0]          packed_best;

  for (genvar r = 0; r < R; r++) begin : g_pack
    assign packed_best[(R-r)*N-1 -: N] = best_s[r][C-1];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rd_sr  <= '0;
      rd_cnt <= '0;
    end else if (rd_start) begin
      rd_sr  <= RDW'(packed_best) << (RDW - R * N);
      rd_cnt <= ($clog2(NW+1))'(NW);
    end else if (rd_cnt != 0) begin
      rd_sr  <= rd_sr << 32;
      rd_cnt <= rd_cnt - 1'b1;
    end
  end

  assign s_valid = (rd_cnt != 0);
  assign s_word  = rd_sr[RDW-1 -: 32];
endmodule
