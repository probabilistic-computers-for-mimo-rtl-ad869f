// ising_machine -- top level of the p-computer.
//
// Instantiates the J, h and decoded-state BRAMs, the control-and-load unit,
// the parallel-tempering core and the readout writer, wired as in the
// system diagram: the host writes beta-scaled weights and biases into the J
// and h BRAMs (one 10-bit value in the low bits of each 32-bit word, order
// given in ising_start), sets the sweep-to-swap ratio (ssr = 3*S) and the
// run timer, raises start (with load_j / load_h as needed) and polls done;
// the best states of the strongest-constraint column are then in the state
// BRAM, NW words, replica row 0 first, p-bit N-1 first within a replica.
//
// The PCIe endpoint, AXI interconnect with its clock-domain crossing, and the
// AXI GPIO registers are vendor parts and are not included: their BRAM host
// ports and register values are this module's ports, and everything runs on
// one clock clk (the PT clock, i.e. after the interconnect's crossing).
// Defaults: 16x16 MIMO 2D-PT, L = 16 logical nodes (N = 32 p-bits), R = 9
// beta rows, C = 6 P columns, stride D = 8, the published beta/P schedule.
module ising_machine #(
  parameter int L          = 16,
  parameter int R          = 9,
  parameter int C          = 6,
  parameter int D          = 8,
  parameter int BETA_M [R] = pt_pkg::BETA_MIMO16_M,
  parameter int P_M    [C] = pt_pkg::P_MIMO16_M,
  parameter int N          = 2 * L,
  parameter int E          = pt_pkg::num_edges(L),
  parameter int KJ         = R * C * E,
  parameter int KH         = R * C * N,
  parameter int NW         = (R * N + 31) / 32,
  parameter int AJ         = $clog2(KJ),
  parameter int AH         = $clog2(KH),
  parameter int AS         = (NW > 1) ? $clog2(NW) : 1
) (
  input  logic                       clk,
  input  logic                       rst,
  // host side of the J BRAM
  input  logic                       j_we,
  input  logic [AJ-1:0]              j_addr,
  input  logic [31:0]                j_din,
  output logic [31:0]                j_dout,
  // host side of the h BRAM
  input  logic                       h_we,
  input  logic [AH-1:0]              h_addr,
  input  logic [31:0]                h_din,
  output logic [31:0]                h_dout,
  // host side of the decoded-state BRAM
  input  logic [AS-1:0]              s_addr,
  output logic [31:0]                s_dout,
  // control registers
  input  logic                       start,
  input  logic                       load_j,
  input  logic                       load_h,
  input  logic                       rst_best,
  input  logic [pt_pkg::SSR_W-1:0]   ssr,
  input  logic [pt_pkg::TIMER_W-1:0] timer,
  output logic                       done
);
  import pt_pkg::*;

  logic [AJ-1:0] jb_addr;
  logic [AH-1:0] hb_addr;
  logic [31:0]   jb_q, hb_q, unused_sq;
  logic signed [WJ-1:0] j_all [R*C][E];
  logic signed [WH-1:0] h_all [R*C][N];
  logic          clk_en, pt_rst_best, rd_start, pt_idle, rd_finished;
  logic          s_valid, s_we;
  logic [31:0]   s_word, s_din;
  logic [AS-1:0] s_waddr;

  bram_dp #(.DW(32), .DEPTH(KJ), .AW(AJ)) u_jbram (
    .clk_a(clk), .we_a(j_we), .addr_a(j_addr), .din_a(j_din), .dout_a(j_dout),
    .clk_b(clk), .we_b(1'b0), .addr_b(jb_addr), .din_b(32'd0), .dout_b(jb_q));

  bram_dp #(.DW(32), .DEPTH(KH), .AW(AH)) u_hbram (
    .clk_a(clk), .we_a(h_we), .addr_a(h_addr), .din_a(h_din), .dout_a(h_dout),
    .clk_b(clk), .we_b(1'b0), .addr_b(hb_addr), .din_b(32'd0), .dout_b(hb_q));

  bram_dp #(.DW(32), .DEPTH(NW), .AW(AS)) u_sbram (
    .clk_a(clk), .we_a(1'b0), .addr_a(s_addr), .din_a(32'd0), .dout_a(s_dout),
    .clk_b(clk), .we_b(s_we), .addr_b(s_waddr), .din_b(s_din), .dout_b(unused_sq));

  ising_start #(.L(L), .R(R), .C(C), .N(N), .E(E), .KJ(KJ), .KH(KH),
                .AJ(AJ), .AH(AH)) u_start (
    .clk(clk), .rst(rst), .start(start), .load_j(load_j), .load_h(load_h),
    .rst_best_in(rst_best), .timer(timer),
    .jb_addr(jb_addr), .jb_q(jb_q), .hb_addr(hb_addr), .hb_q(hb_q),
    .j_all(j_all), .h_all(h_all),
    .clk_en(clk_en), .rst_best(pt_rst_best), .rd_start(rd_start),
    .pt_idle(pt_idle), .rd_finished(rd_finished), .done(done));

  pt_core #(.L(L), .R(R), .C(C), .D(D), .BETA_M(BETA_M), .P_M(P_M),
            .N(N), .E(E), .NW(NW)) u_pt (
    .clk(clk), .rst(rst), .en(clk_en), .ssr(ssr), .rst_best(pt_rst_best),
    .j_all(j_all), .h_all(h_all), .rd_start(rd_start),
    .idle(pt_idle), .s_valid(s_valid), .s_word(s_word));

  ising_readout #(.NW(NW), .AW(AS)) u_read (
    .clk(clk), .rst(rst), .s_valid(s_valid), .s_word(s_word),
    .we(s_we), .addr(s_waddr), .din(s_din), .finished(rd_finished));
endmodule
