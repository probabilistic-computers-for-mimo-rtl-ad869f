// best_state -- lowest-energy tracker of one replica.
//
// When upd is high the current energy is compared with the stored best; if
// it is lower or equal, both the best energy and the N-bit state are
// replaced. rst and rst_best set the best energy to the largest positive
// value so that the next valid energy replaces it (rst also clears the state).
// The replica pulses upd on the first cycle of each beta-swap phase, when the
// accumulated energy and the state vector still belong together (the swap
// itself lands three cycles later).
//
// Interface: energy/state in, best_e/best_s out; all registered.
module best_state #(
  parameter int N  = 32,
  parameter int WE = 19
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 rst_best,
  input  logic                 upd,
  input  logic signed [WE-1:0] energy,
  input  logic [N-1:0]         state,
  output logic signed [WE-1:0] best_e,
  output logic [N-1:0]         best_s
);
  localparam logic signed [WE-1:0] EMAX = {1'b0, {(WE-1){1'b1}}};

  always_ff @(posedge clk) begin
    if (rst) begin
      best_e <= EMAX;
      best_s <= '0;
    end else if (rst_best) begin
      best_e <= EMAX;
    end else if (upd && energy <= best_e) begin
      best_e <= energy;
      best_s <= state;
    end
  end
endmodule
