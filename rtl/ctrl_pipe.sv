// ctrl_pipe -- pipelined distribution of the FSM control bundle.
//
// A shift register of DEPTH stages carries the control bundle from the
// central FSM to every replica and swap controller, so the high fan-out is
// driven from registers (which synthesis may duplicate). All consumers see
// the same delayed bundle, so phase lengths are unchanged; only the latency
// grows by DEPTH cycles. The default depth is ceil(log2(R*C)) + 1.
// busy is high while any stage holds an enable bit.
module ctrl_pipe #(
  parameter int DEPTH = 7
) (
  input  logic             clk,
  input  logic             rst,
  input  pt_pkg::pt_ctrl_t d,
  output pt_pkg::pt_ctrl_t q,
  output logic             busy
);
  pt_pkg::pt_ctrl_t stg [DEPTH];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < DEPTH; k++) stg[k] <= '0;
    end else begin
      stg[0] <= d;
      for (int k = 1; k < DEPTH; k++) stg[k] <= stg[k-1];
    end
  end

  always_comb begin
    busy = 1'b0;
    for (int k = 0; k < DEPTH; k++)
      busy |= stg[k].en_sweep | stg[k].en_acc | stg[k].en_inf | stg[k].en_b | stg[k].en_p;
  end

  assign q = stg[DEPTH-1];
endmodule
