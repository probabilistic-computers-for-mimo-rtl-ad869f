// ising_readout -- writes the streamed best states into the output BRAM.
//
// While s_valid is high the PT core presents one 32-bit word per cycle; this
// block writes it to the next sequential address of the state BRAM, starting
// at address 0 on the first s_valid cycle after reset or after the previous
// burst. After NW words the write enable drops and finished is set; finished
// clears when a new burst starts.
//
// Interface: s_valid/s_word in; we/addr/din to the BRAM's PT port.
module ising_readout #(
  parameter int NW = 9,
  parameter int AW = 4
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          s_valid,
  input  logic [31:0]   s_word,
  output logic          we,
  output logic [AW-1:0] addr,
  output logic [31:0]   din,
  output logic          finished
);
  logic [AW:0] cnt;
  logic        active;

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt      <= '0;
      active   <= 1'b0;
      finished <= 1'b0;
    end else if (s_valid) begin
      if (!active) begin
        active   <= 1'b1;
        finished <= 1'b0;
        cnt      <= (AW+1)'(1);
      end else if (cnt < (AW+1)'(NW)) begin
        cnt <= cnt + 1'b1;
        if (cnt + 1'b1 == (AW+1)'(NW)) finished <= 1'b1;
      end
    end else begin
      active <= 1'b0;
      if (active) finished <= 1'b1;
    end
  end

  always_comb begin
    we   = s_valid && (!active || cnt < (AW+1)'(NW));
    addr = active ? AW'(cnt) : '0;
    din  = s_word;
  end
endmodule
