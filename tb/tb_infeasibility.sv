// tb_infeasibility -- self-checking testbench for the infeasibility counter.
// N = 32 p-bits (16 copy pairs): g must equal the number of pairs i whose
// copies m[i] and m[i+16] differ, one cycle after en; it holds while en is
// low. Watchdog: 10000 cycles.
module tb_infeasibility;
  localparam int N = 32;
  localparam int WG = $clog2(N / 2 + 1);
  logic clk = 1'b0, rst = 1'b1, en = 1'b0;
  logic [N-1:0] m;
  logic [WG-1:0] g;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  infeasibility #(.N(N)) dut (.clk(clk), .rst(rst), .en(en), .m(m), .g(g));

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
    int cnt, last;
    m = '0;
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    last = 0;
    for (int t = 0; t < 500; t++) begin
      case (t)
        0: m = '0;
        1: m = 32'h0000_FFFF;   // all 16 pairs differ
        2: m = 32'hFFFF_FFFF;
        default: m = $urandom;
      endcase
      cnt = 0;
      for (int i = 0; i < N / 2; i++) if (m[i] != m[i + N / 2]) cnt++;
      en = 1'b1;
      @(posedge clk); #1;
      en = 1'b0;
      chk(int'(g) == cnt, $sformatf("g got %0d want %0d", g, cnt));
      m = ~m;
      @(posedge clk); #1;
      chk(int'(g) == cnt, "holds while en low");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
