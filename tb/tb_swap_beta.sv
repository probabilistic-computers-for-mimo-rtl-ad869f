// tb_swap_beta -- self-checking testbench for a beta-swap controller.
// Pair (a,b) at beta 1.0 / 2.0 (mu0 = -1, mu1 = +0.5, 3 fraction bits) and
// pair (b,c) at beta 2.0 / 4.0. Energies E = 2*beta*H with 4 fraction bits.
// Each trial holds en for the 4-cycle swap phase; a swap may only fire on
// the fourth cycle, only on the pair selected by dir. Measured acceptance
// rates must match min(1, exp(Delta)) within 0.08 (the piecewise-linear exponent is up to
// 6 % high, plus sampling noise) for Delta = 0.5, -0.69,
// -1.5 and be zero for Delta = -40. Watchdog: 200000 cycles.
module tb_swap_beta;
  localparam int WE = 19;
  logic clk = 1'b0, rst = 1'b1, en = 1'b0, dir = 1'b0;
  logic signed [WE-1:0] e_a, e_b, e_c;
  logic [1:0] swap;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  swap_beta #(.WE(WE), .MU0_EVEN(-8), .MU1_EVEN(4), .MU0_ODD(-8), .MU1_ODD(4),
              .HAS_C(1'b1), .SEED(32'h0BAD_5EED)) dut (
    .clk(clk), .rst(rst), .en(en), .dir(dir), .e_a(e_a), .e_b(e_b), .e_c(e_c),
    .swap(swap));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // one swap phase; returns whether the selected pair swapped
  task automatic phase(output bit fired);
    fired = 0;
    @(negedge clk);
    en = 1'b1;
    for (int c = 0; c < 4; c++) begin
      #1;
      if (c < 3) chk(swap == 2'b00, "no swap before the fourth cycle");
      else begin
        fired = |swap;
        chk(dir ? (swap[0] == 1'b0) : (swap[1] == 1'b0), "only the selected pair");
      end
      @(negedge clk);
    end
    en = 1'b0;
    #1 chk(swap == 2'b00, "no swap after the phase");
    @(posedge clk);
  endtask

  // energies for a wanted Delta (units of 1/128): Delta = (-8*E1 + 4*E2)/128
  task automatic rate(input bit d, input int e1, input int e2, input real want);
    int acc;
    bit f;
    real p;
    dir = d;
    if (d) begin e_a = '0; e_b = WE'(e1); e_c = WE'(e2); end
    else   begin e_a = WE'(e1); e_b = WE'(e2); e_c = '0; end
    acc = 0;
    for (int t = 0; t < 1000; t++) begin
      phase(f);
      acc += int'(f);
    end
    p = real'(acc) / 1000.0;
    chk(p > want - 0.08 && p < want + 0.08, $sformatf("dir %0d rate %f want %f", d, p, want));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    e_a = '0; e_b = '0; e_c = '0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    @(posedge clk);
    rate(1'b0, -8, 0, 1.0);                 // Delta = +0.5
    rate(1'b0, 11, 0, $exp(-88.0 / 128.0)); // Delta = -0.6875
    rate(1'b1, 0, -48, $exp(-192.0 / 128.0));
    rate(1'b0, 640, 0, 0.0);                // Delta = -40
    rate(1'b1, 24, 0, $exp(-192.0 / 128.0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
