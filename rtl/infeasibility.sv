// infeasibility -- copy-disagreement counter of one replica.
//
// With two copies per logical node, p-bit k and p-bit k+N/2 are copies of the
// same node. Their XOR marks a disagreement and a population count of the N/2
// XORs gives g, registered in the single cycle in which en is high. g = 0
// means the state is feasible (all copies agree).
// The count is $clog2(N/2+1) bits wide so that N/2 itself fits; the source's
// ceil(log2(N/2)) width cannot hold a total disagreement.
//
// Interface: m is the replica state, g the registered count.
module infeasibility #(
  parameter int N  = 32,
  parameter int WG = $clog2(N / 2 + 1)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          en,
  input  logic [N-1:0]  m,
  output logic [WG-1:0] g
);
  logic [N/2-1:0] diff;
  logic [WG-1:0]  cnt;

  always_comb begin
    diff = m[N/2-1:0] ^ m[N-1:N/2];
    cnt  = '0;
    for (int k = 0; k < N / 2; k++) cnt += WG'(diff[k]);
  end

  always_ff @(posedge clk) begin
    if (rst)     g <= '0;
    else if (en) g <= cnt;
  end
endmodule
