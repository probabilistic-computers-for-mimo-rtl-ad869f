// tb_lfsr32 -- self-checking testbench for the 32-bit Galois LFSR.
// Checks: the state after reset equals SEED; 5000 steps against a bit-serial
// reference of the polynomial x^32 + x^22 + x^2 + x + 1 written out tap by
// tap; the state is never zero; the share of ones in bit 31 is near one half.
// Watchdog: 20000 cycles.
module tb_lfsr32;
  logic clk = 1'b0, rst = 1'b1;
  logic [31:0] r, ref_r;
  int checks = 0, failures = 0, ones = 0;
  always #5 clk = ~clk;

  lfsr32 #(.SEED(32'hACE1_2345)) dut (.clk(clk), .rst(rst), .r(r));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // reference: shift right, the bit that falls out is fed back into
  // positions 31, 21, 1 and 0 (exponents 32, 22, 2, 1 of the polynomial)
  function automatic logic [31:0] step(input logic [31:0] s);
    logic [31:0] n;
    logic fb;
    fb = s[0];
    for (int i = 0; i < 31; i++) n[i] = s[i+1];
    n[31] = fb;
    n[21] = n[21] ^ fb;
    n[1]  = n[1]  ^ fb;
    n[0]  = n[0]  ^ fb;
    return n;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    chk(r == 32'hACE1_2345, "reset state equals SEED");
    ref_r = r;
    for (int t = 0; t < 5000; t++) begin
      @(posedge clk); #1;
      ref_r = step(ref_r);
      if (r != ref_r) begin chk(1'b0, $sformatf("step %0d got %h want %h", t, r, ref_r)); break; end
      if (r == 32'd0) begin chk(1'b0, "state reached zero"); break; end
      ones += int'(r[31]);
    end
    chk(1'b1, "sequence matches reference");
    chk(ones > 2300 && ones < 2700, $sformatf("bit balance %0d/5000", ones));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
