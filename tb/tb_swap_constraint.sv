// tb_swap_constraint -- self-checking testbench for a P-swap controller.
// mu = 2*beta*(P_b - P_a) = 0.5 for the even pair and 1.0 for the odd pair
// (3 fraction bits). Delta = mu * (g_b - g_a). Acceptance rates over 1000
// four-cycle swap phases must match min(1, exp(Delta)) within 0.08 (the piecewise-linear exponent is up to
// 6 % high, plus sampling noise); a swap
// may fire only on the fourth cycle and only on the pair chosen by dir.
// Watchdog: 200000 cycles.
module tb_swap_constraint;
  localparam int WG = 5;
  logic clk = 1'b0, rst = 1'b1, en = 1'b0, dir = 1'b0;
  logic [WG-1:0] g_a, g_b, g_c;
  logic [1:0] swap;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  swap_constraint #(.WG(WG), .MU_EVEN(4), .MU_ODD(8), .HAS_C(1'b1),
                    .SEED(32'h5EED_0001)) dut (
    .clk(clk), .rst(rst), .en(en), .dir(dir), .g_a(g_a), .g_b(g_b), .g_c(g_c),
    .swap(swap));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

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
    @(posedge clk);
  endtask

  task automatic rate(input bit d, input int ga, input int gb, input int gc, input real want);
    int acc;
    bit f;
    real p;
    dir = d; g_a = WG'(ga); g_b = WG'(gb); g_c = WG'(gc);
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
    g_a = '0; g_b = '0; g_c = '0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    @(posedge clk);
    rate(1'b0, 3, 4, 0, 1.0);              // stronger column worse: always swap
    rate(1'b0, 3, 2, 0, $exp(-0.5));       // Delta = -0.5
    rate(1'b0, 5, 2, 9, $exp(-1.5));       // Delta = -1.5
    rate(1'b1, 0, 3, 2, $exp(-1.0));       // odd pair, Delta = -1.0
    rate(1'b1, 9, 16, 0, 0.0);             // Delta = -16
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
