// tb_ctrl_pipe -- self-checking testbench for the control distribution
// pipeline: q must be d delayed by exactly DEPTH = 4 cycles and busy must be
// high while any phase enable is in flight. Watchdog: 10000 cycles.
module tb_ctrl_pipe;
  localparam int DEPTH = 4;
  logic clk = 1'b0, rst = 1'b1;
  pt_pkg::pt_ctrl_t d, q;
  logic busy;
  pt_pkg::pt_ctrl_t hist [$];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  ctrl_pipe #(.DEPTH(DEPTH)) dut (.clk(clk), .rst(rst), .d(d), .q(q), .busy(busy));

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
    bit any;
    d = '0;
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    for (int k = 0; k < DEPTH; k++) hist.push_back('0);
    for (int t = 0; t < 1000; t++) begin
      d = ($urandom_range(3) == 0) ? pt_pkg::pt_ctrl_t'($urandom) : '0;
      @(posedge clk); #1;
      hist.push_back(d);
      void'(hist.pop_front());
      chk(q == hist[0], $sformatf("t=%0d q=%b want %b", t, q, hist[0]));
      any = 0;
      foreach (hist[k]) any |= hist[k].en_sweep | hist[k].en_acc | hist[k].en_inf
                              | hist[k].en_b | hist[k].en_p;
      chk(busy == any, "busy");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
