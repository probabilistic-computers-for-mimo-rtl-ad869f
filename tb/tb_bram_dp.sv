// tb_bram_dp -- self-checking testbench for the true dual-port BRAM
// (32-bit words, 64 deep). Writes through both ports, reads back through
// both, checks the one-cycle read latency and that an idle port leaves the
// contents untouched. Watchdog: 10000 cycles.
module tb_bram_dp;
  localparam int DEPTH = 64, AW = 6;
  logic clk = 1'b0;
  logic we_a = 1'b0, we_b = 1'b0;
  logic [AW-1:0] addr_a = '0, addr_b = '0;
  logic [31:0] din_a = '0, din_b = '0, dout_a, dout_b;
  logic [31:0] model [DEPTH];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  bram_dp #(.DW(32), .DEPTH(DEPTH)) dut (
    .clk_a(clk), .we_a(we_a), .addr_a(addr_a), .din_a(din_a), .dout_a(dout_a),
    .clk_b(clk), .we_b(we_b), .addr_b(addr_b), .din_b(din_b), .dout_b(dout_b));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int k = 0; k < DEPTH; k++) model[k] = '0;
    @(negedge clk);
    // port A writes even, port B odd addresses
    for (int k = 0; k < DEPTH; k += 2) begin
      we_a = 1'b1; addr_a = AW'(k);     din_a = $urandom; model[k] = din_a;
      we_b = 1'b1; addr_b = AW'(k + 1); din_b = $urandom; model[k + 1] = din_b;
      @(negedge clk);
    end
    we_a = 1'b0; we_b = 1'b0;
    // read back crosswise, one cycle latency
    for (int k = 0; k < DEPTH; k++) begin
      addr_a = AW'(k); addr_b = AW'(DEPTH - 1 - k);
      @(posedge clk); #1;
      chk(dout_a == model[k], $sformatf("A read %0d", k));
      chk(dout_b == model[DEPTH - 1 - k], $sformatf("B read %0d", DEPTH - 1 - k));
      addr_a = AW'(k + 1);
      #1 chk(dout_a == model[k], "output registered, not combinational");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
