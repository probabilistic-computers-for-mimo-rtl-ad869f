// energy_acc -- replica energy accumulator.
//
// On the first cycle of en_acc (its rising edge, which also clears the
// accumulator: acc_rst) the N local energies are captured into a shift
// register. On every following cycle with en_acc high the lowest D entries
// are summed by an adder tree and added to the accumulator E while the
// register shifts down by D, filling with zeros. After ceil(N/D) cycles E holds
// sum(e_i) = 2 * (beta-scaled replica energy), i.e. E carries one more
// fraction bit (4) than the weights. The Acc phase therefore lasts
// ceil(N/D)+1 cycles (capture + ceil(N/D) sums); extra cycles add zeros.
//
// Interface: e_in[N] local energies, en_acc phase enable, energy output.
// Timing: energy is final one cycle after the last accumulate cycle and then
// holds until the next capture.
module energy_acc #(
  parameter int N   = 32,
  parameter int D   = 8,
  parameter int WEL = 14,
  parameter int WE  = WEL + $clog2(N)
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  en_acc,
  input  logic signed [WEL-1:0] e_in [N],
  output logic signed [WE-1:0]  energy
);
  localparam int K  = (N + D - 1) / D;
  localparam int NP = K * D;
  localparam int WS = WEL + $clog2(D);

  logic signed [WEL-1:0] sr [NP];
  logic signed [WEL-1:0] win [D];
  logic signed [WS-1:0]  wsum;
  logic                  en_d;

  for (genvar k = 0; k < D; k++) begin : g_win
    assign win[k] = sr[k];
  end

  adder_tree #(.N(D), .W(WEL)) u_tree (.in(win), .sum(wsum));

  always_ff @(posedge clk) begin
    if (rst) begin
      en_d   <= 1'b0;
      energy <= '0;
      for (int k = 0; k < NP; k++) sr[k] <= '0;
    end else begin
      en_d <= en_acc;
      if (en_acc && !en_d) begin
        energy <= '0;
        for (int k = 0; k < NP; k++) sr[k] <= (k < N) ? e_in[k] : '0;
      end else if (en_acc) begin
        energy <= energy + WE'(wsum);
        for (int k = 0; k < NP; k++) sr[k] <= (k + D < NP) ? sr[k + D] : '0;
      end
    end
  end
endmodule
