// swap_constraint -- Metropolis replica-exchange controller along the P axis.
//
// Same structure and 4-cycle pipeline as swap_beta, for three consecutive
// replicas a, b, c of one row (columns 2k..2k+2). The replicas deliver their
// copy-disagreement counts g, and the log acceptance probability of pair
// (x,y), y the stronger-constraint column, is
//   delta = mu * (g_y - g_x),  mu = 2 * beta_row * (P_y - P_x)
// (mu with 3 fraction bits; the result is aligned to the 7-bit delta format).
// It is positive, hence always accepted, when the stronger column holds the
// less feasible state, which moves feasible states toward strong P.
// dir = 0 evaluates (a,b) -> swap[0], dir = 1 evaluates (b,c) -> swap[1].
module swap_constraint #(
  parameter int          WG      = 5,
  parameter int          MU_EVEN = 0,
  parameter int          MU_ODD  = 0,
  parameter bit          HAS_C   = 1'b1,
  parameter logic [31:0] SEED    = 32'h1
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          en,
  input  logic          dir,
  input  logic [WG-1:0] g_a,
  input  logic [WG-1:0] g_b,
  input  logic [WG-1:0] g_c,
  output logic [1:0]    swap
);
  localparam int WD = WG + pt_pkg::MU_W + 6;
  localparam int SH = pt_pkg::DLT_FRAC - pt_pkg::MU_FRAC;
  localparam logic signed [pt_pkg::MU_W-1:0] ME = pt_pkg::MU_W'(MU_EVEN);
  localparam logic signed [pt_pkg::MU_W-1:0] MO = pt_pkg::MU_W'(MU_ODD);

  logic signed [WG:0]   dg;
  logic signed [WD-1:0] delta_q;
  logic                 accept;
  logic [1:0]           cnt;
  logic                 fire;

  always_comb begin
    if (dir) dg = $signed({1'b0, g_c}) - $signed({1'b0, g_b});
    else     dg = $signed({1'b0, g_b}) - $signed({1'b0, g_a});
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      delta_q <= '0;
      cnt     <= '0;
    end else begin
      delta_q <= (WD'(dir ? MO : ME) * WD'(dg)) <<< SH;
      cnt     <= en ? cnt + 1'b1 : 2'd0;
    end
  end

  swap_accept #(.WD(WD), .SEED(SEED)) u_acc (
    .clk(clk), .rst(rst), .delta(delta_q), .accept(accept));

  assign fire = en && (cnt == 2'd3) && accept;
  assign swap = {fire && dir && HAS_C, fire && !dir};
endmodule
