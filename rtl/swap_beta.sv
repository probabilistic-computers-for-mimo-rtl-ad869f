// swap_beta -- Metropolis replica-exchange controller along the beta axis.
//
// Serves three consecutive replicas a, b, c of one column (rows 2k..2k+2) and
// the two pairs (a,b) and (b,c). dir selects the pair: dir = 0 the even pair
// (a,b), dir = 1 the odd pair (b,c); only the selected pair is evaluated.
// Each replica delivers only its beta-scaled energy (as 2*beta*H with 4
// fraction bits), so the log acceptance probability of pair (x,y) is
//   delta = mu0 * (beta_x E_x) + mu1 * (beta_y E_y) = (beta_y-beta_x)(E_y-E_x)
// with mu0 = 1 - beta_y/beta_x and mu1 = 1 - beta_x/beta_y precomputed with
// 3 fraction bits (four constants: two per pair), giving 7 fraction bits.
// The multiplications are by constants.
//
// Pipeline (4 cycles, the Swap phase): cycle 0 of en registers delta; cycles
// 1 and 2 are swap_accept's exp/float and compare stages; in cycle 3 the
// swap output for the selected pair is high for one cycle if accepted:
// swap[0] exchanges (a,b), swap[1] exchanges (b,c). With HAS_C = 0 (no third
// replica at the column's end) the odd pair never fires.
module swap_beta #(
  parameter int          WE       = 19,
  parameter int          MU0_EVEN = 0,
  parameter int          MU1_EVEN = 0,
  parameter int          MU0_ODD  = 0,
  parameter int          MU1_ODD  = 0,
  parameter bit          HAS_C    = 1'b1,
  parameter logic [31:0] SEED     = 32'h1
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 en,
  input  logic                 dir,
  input  logic signed [WE-1:0] e_a,
  input  logic signed [WE-1:0] e_b,
  input  logic signed [WE-1:0] e_c,
  output logic [1:0]           swap
);
  localparam int WD = WE + pt_pkg::MU_W + 1;
  localparam logic signed [pt_pkg::MU_W-1:0] M0E = pt_pkg::MU_W'(MU0_EVEN);
  localparam logic signed [pt_pkg::MU_W-1:0] M1E = pt_pkg::MU_W'(MU1_EVEN);
  localparam logic signed [pt_pkg::MU_W-1:0] M0O = pt_pkg::MU_W'(MU0_ODD);
  localparam logic signed [pt_pkg::MU_W-1:0] M1O = pt_pkg::MU_W'(MU1_ODD);

  logic signed [WD-1:0] delta_q;
  logic                 accept;
  logic [1:0]           cnt;
  logic                 fire;

  always_ff @(posedge clk) begin
    if (rst) begin
      delta_q <= '0;
      cnt     <= '0;
    end else begin
      if (dir) delta_q <= WD'(M0O * e_b) + WD'(M1O * e_c);
      else     delta_q <= WD'(M0E * e_a) + WD'(M1E * e_b);
      cnt <= en ? cnt + 1'b1 : 2'd0;
    end
  end

  swap_accept #(.WD(WD), .SEED(SEED)) u_acc (
    .clk(clk), .rst(rst), .delta(delta_q), .accept(accept));

  assign fire = en && (cnt == 2'd3) && accept;
  assign swap = {fire && dir && HAS_C, fire && !dir};
endmodule
