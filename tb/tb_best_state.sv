// tb_best_state -- self-checking testbench for the best-energy register.
// Feeds 2000 random (energy, state) pairs with random update strobes and
// compares with a running-minimum reference (ties take the newer state);
// rst_best restarts the minimum search without touching the stored state.
// Watchdog: 20000 cycles.
module tb_best_state;
  localparam int N = 32, WE = 19;
  logic clk = 1'b0, rst = 1'b1, rst_best = 1'b0, upd = 1'b0;
  logic signed [WE-1:0] energy, best_e;
  logic [N-1:0] state, best_s;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  best_state #(.N(N), .WE(WE)) dut (
    .clk(clk), .rst(rst), .rst_best(rst_best), .upd(upd), .energy(energy),
    .state(state), .best_e(best_e), .best_s(best_s));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int ref_e;
    logic [N-1:0] ref_s;
    bit have;
    energy = '0; state = '0;
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    chk(best_e == {1'b0, {(WE-1){1'b1}}}, "reset value is the largest energy");
    have = 0; ref_e = 0; ref_s = '0;
    for (int t = 0; t < 2000; t++) begin
      energy   = WE'($signed($urandom_range(2000)) - 1000);
      state    = $urandom;
      upd      = 1'($urandom);
      rst_best = ($urandom_range(99) == 0);
      if (t == 1000) energy = WE'(ref_e);   // a tie
      @(posedge clk); #1;
      if (rst_best) have = 0;
      else if (upd && (!have || int'(energy) <= ref_e)) begin
        have = 1; ref_e = int'(energy); ref_s = state;
      end
      if (have) chk(int'(best_e) == ref_e && best_s == ref_s,
                    $sformatf("t=%0d best %0d want %0d", t, best_e, ref_e));
      else      chk(best_e == {1'b0, {(WE-1){1'b1}}} && best_s == ref_s, "cleared");
    end
    upd = 1'b0; rst_best = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
