// tb_float_mplus5 -- self-checking testbench for the conversion of a 32-bit
// random integer into exponent (leading-one position) and 5-bit mantissa.
// Reference: for every r the value 2^expo * (1 + mant/32) must satisfy
// v <= r < 2^expo * (1 + (mant+1)/32), which fixes both fields uniquely.
// Combinational; watchdog 1 ms.
module tb_float_mplus5;
  logic [31:0] r;
  logic [4:0]  expo, mant;
  int checks = 0, failures = 0;

  float_mplus5 #(.M(5)) dut (.r(r), .expo(expo), .mant(mant));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    real lo, hi, v;
    for (int t = 0; t < 5000; t++) begin
      if (t < 32)       r = 32'd1 << t;
      else if (t < 64)  r = ~32'd0 >> (t - 32);
      else              r = $urandom >> $urandom_range(31);
      if (r == 0) r = 32'd1;
      #1;
      v  = real'(r);
      lo = (2.0 ** real'(expo)) * (1.0 + real'(mant) / 32.0);
      hi = (2.0 ** real'(expo)) * (1.0 + (real'(mant) + 1.0) / 32.0);
      chk(v >= lo && v < hi, $sformatf("r=%h expo=%0d mant=%0d", r, expo, mant));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
