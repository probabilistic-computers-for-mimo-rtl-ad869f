// tb_pbit -- self-checking testbench for one p-bit (DEG = 3).
// Checks the statistics of m against the p-bit law P(m=1) = (1+tanh(I))/2
// with I in units of 1/8 (I = 0, +8, -8), that saturated fields force the
// state, that m holds while en is low, and that a swap load takes priority
// over an update and copies the selected neighbour's bit in one cycle.
// Watchdog: 100000 cycles.
module tb_pbit;
  localparam int DEG = 3;
  localparam int WEL = pt_pkg::we_local(DEG);
  logic clk = 1'b0, rst = 1'b1, en = 1'b0;
  logic [3:0] swap = '0, m_swap = '0;
  logic signed [9:0] j_nbr [DEG];
  logic m_nbr [DEG];
  logic signed [9:0] h;
  logic m;
  logic signed [WEL-1:0] e_loc;
  logic [6:0] i_field;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  pbit #(.DEG(DEG), .SEED(32'h1234_5678)) dut (
    .clk(clk), .rst(rst), .en(en), .swap(swap), .m_swap(m_swap),
    .j_nbr(j_nbr), .m_nbr(m_nbr), .h(h), .m(m), .e_loc(e_loc), .i_field(i_field));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // run n updates with bias hh (neighbours' weights zero), return ones
  task automatic stat(input int hh, input int n, output int ones);
    h = 10'(hh);
    en = 1'b1;
    ones = 0;
    for (int t = 0; t < n; t++) begin
      @(posedge clk); #1;
      ones += int'(m);
    end
    en = 1'b0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int ones;
    real p;
    for (int k = 0; k < DEG; k++) begin j_nbr[k] = '0; m_nbr[k] = 1'b0; end
    h = '0;
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    chk(m == 1'b0, "reset state 0");
    // statistics
    stat(0, 4000, ones);
    p = real'(ones) / 4000.0;
    chk(p > 0.45 && p < 0.55, $sformatf("I=0: P(1)=%f", p));
    stat(8, 4000, ones);
    p = real'(ones) / 4000.0;
    chk(p > 0.85 && p < 0.91, $sformatf("I=+1: P(1)=%f want 0.881", p));
    stat(-8, 4000, ones);
    p = real'(ones) / 4000.0;
    chk(p > 0.09 && p < 0.15, $sformatf("I=-1: P(1)=%f want 0.119", p));
    // field through the neighbours: all three up with J = +20 -> I = 60
    for (int k = 0; k < DEG; k++) begin j_nbr[k] = 10'sd20; m_nbr[k] = 1'b1; end
    stat(0, 200, ones);
    chk(ones == 200, "saturated positive field forces 1");
    for (int k = 0; k < DEG; k++) m_nbr[k] = 1'b0;
    stat(0, 200, ones);
    chk(ones == 0, "saturated negative field forces 0");
    chk($signed(i_field) == -7'sd60, "influence -60");
    // hold when en is low
    for (int k = 0; k < DEG; k++) m_nbr[k] = 1'b1;
    repeat (20) @(posedge clk);
    #1 chk(m == 1'b0, "holds while en low");
    // swap load beats update
    en = 1'b1;
    for (int k = 0; k < DEG; k++) m_nbr[k] = 1'b0;   // update would give 0
    swap = 4'b0100; m_swap = 4'b0100;
    @(posedge clk); #1;
    chk(m == 1'b1, "swap from source 2 loads 1 in one cycle");
    swap = 4'b1000; m_swap = 4'b0111;
    @(posedge clk); #1;
    chk(m == 1'b0, "swap from source 3 loads 0");
    swap = 4'b0001; m_swap = 4'b0001;
    @(posedge clk); #1;
    chk(m == 1'b1, "swap from source 0 loads 1");
    swap = 4'b0000;
    @(posedge clk); #1;
    chk(m == 1'b0, "update resumes after swap");
    en = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
