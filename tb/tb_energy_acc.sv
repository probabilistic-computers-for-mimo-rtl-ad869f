// tb_energy_acc -- self-checking testbench for the energy accumulator.
// N = 32 local energies, stride D = 8: the sum must be complete after the
// capture cycle plus ceil(N/D) = 4 accumulation cycles, and not one cycle
// earlier; it then holds while en_acc is low. 200 random vectors.
// Watchdog: 20000 cycles.
module tb_energy_acc;
  localparam int N = 32, D = 8, WEL = 14;
  localparam int WE = WEL + $clog2(N);
  logic clk = 1'b0, rst = 1'b1, en_acc = 1'b0;
  logic signed [WEL-1:0] e_in [N];
  logic signed [WE-1:0]  energy;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  energy_acc #(.N(N), .D(D), .WEL(WEL)) dut (
    .clk(clk), .rst(rst), .en_acc(en_acc), .e_in(e_in), .energy(energy));

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
    int sum;
    for (int k = 0; k < N; k++) e_in[k] = '0;
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    for (int t = 0; t < 200; t++) begin
      sum = 0;
      for (int k = 0; k < N; k++) begin
        e_in[k] = WEL'($signed($urandom_range(16383)) - 8192);
        sum += int'(e_in[k]);
      end
      en_acc = 1'b1;
      repeat (N / D) @(posedge clk);        // capture + 3 windows
      #1;
      if (t < 20) chk(int'(energy) != sum || sum == 0, "sum not ready one cycle early");
      for (int k = 0; k < N; k++) e_in[k] = '0; // inputs may change after capture
      @(posedge clk); #1;
      chk(int'(energy) == sum, $sformatf("sum got %0d want %0d", energy, sum));
      en_acc = 1'b0;
      repeat (3) @(posedge clk);
      #1 chk(int'(energy) == sum, "holds after en_acc drops");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
