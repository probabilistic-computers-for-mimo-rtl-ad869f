// tb_pt_fsm -- self-checking testbench for the parallel-tempering controller
// at the 16x16 MIMO settings: C = 6 columns, S = 25 sweeps (ssr = 3S = 75
// colour-phase cycles), ceil(N/d) = 4. The published step lengths are
// C_step,beta = 3S + ceil(N/d) + 6 = 85 cycles and C_step,P = 3S + 5 = 80.
// The testbench measures each step from one sweep entry to the next, checks
// that beta and P steps alternate with toggling pair directions, that the
// phase enables follow the state, that a C = 1 controller does only beta
// steps, and that dropping en returns the FSM to idle after the swap
// phase. Watchdog: 100000 cycles.
module tb_pt_fsm;
  import pt_pkg::*;
  logic clk = 1'b0, rst = 1'b1, en = 1'b0;
  logic [SSR_W-1:0] ssr;
  pt_ctrl_t ctrl, ctrl1;
  pt_state_e state, state1;
  logic idle, idle1;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  pt_fsm #(.C(6), .NACC(5)) dut  (.clk(clk), .rst(rst), .en(en), .ssr(ssr),
                                  .ctrl(ctrl), .state(state), .idle(idle));
  pt_fsm #(.C(1), .NACC(5)) dut1 (.clk(clk), .rst(rst), .en(en), .ssr(ssr),
                                  .ctrl(ctrl1), .state(state1), .idle(idle1));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int len, nb, np, n1b, sweep_len;
    bit saw_b, saw_p, saw_inf, saw_acc, prev_db, prev_dp;
    ssr = 16'd75;
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    chk(idle && idle1, "idle after reset");
    en = 1'b1;
    @(posedge clk); #1;
    chk(state == ST_SWEEP, "sweep after en");
    nb = 0; np = 0;
    for (int s = 0; s < 12; s++) begin
      len = 0; sweep_len = 0;
      saw_b = 0; saw_p = 0; saw_inf = 0; saw_acc = 0;
      prev_db = ctrl.dir_b; prev_dp = ctrl.dir_p;
      do begin
        sweep_len += int'(ctrl.en_sweep);
        saw_b   |= ctrl.en_b;
        saw_p   |= ctrl.en_p;
        saw_inf |= ctrl.en_inf;
        saw_acc |= ctrl.en_acc;
        chk(ctrl.en_sweep == (state == ST_SWEEP), "en_sweep follows state");
        @(posedge clk); #1;
        len++;
      end while (!(state == ST_SWEEP && len > 80 - 75 + 1 && sweep_len >= 75) && len < 200);
      chk(sweep_len == 75, $sformatf("sweep phase %0d cycles", sweep_len));
      if (saw_b) begin
        nb++;
        chk(len == 85, $sformatf("beta step %0d cycles, want 85", len));
        chk(saw_acc && !saw_p && !saw_inf, "beta step phases");
        chk(ctrl.dir_b != prev_db && ctrl.dir_p == prev_dp, "dir_b toggles");
      end else begin
        np++;
        chk(len == 80, $sformatf("P step %0d cycles, want 80", len));
        chk(saw_p && saw_inf && !saw_acc, "P step phases");
        chk(ctrl.dir_p != prev_dp && ctrl.dir_b == prev_db, "dir_p toggles");
      end
    end
    chk(nb == 6 && np == 6, $sformatf("alternation beta %0d P %0d", nb, np));
    // the C = 1 controller never takes the P path
    n1b = 0;
    repeat (400) begin
      @(posedge clk); #1;
      chk(!ctrl1.en_p && !ctrl1.en_inf, "C=1 never P-swaps");
      n1b += int'(ctrl1.en_b);
    end
    chk(n1b > 0, "C=1 beta swaps");
    // stop: back to idle after the current step
    en = 1'b0;
    len = 0;
    while (!idle && len < 200) begin @(posedge clk); #1; len++; end
    chk(idle && state == ST_IDLE, "idle after en drops");
    repeat (100) @(posedge clk);
    #1 chk(idle && ctrl.en_sweep == 1'b0, "stays idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
