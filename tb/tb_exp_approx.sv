// tb_exp_approx -- self-checking testbench for the base-2 exponential
// approximation of the swap acceptance probability. Delta has 7 fraction
// bits. For negative Delta the value 2^(expo-32) * (1 + mant/32) must be
// within 10 % of exp(Delta) (computed with the real-valued $exp) for
// Delta in [-8, 0); ovf must be set exactly for Delta >= 0 and udf once the
// exponent falls below -32. Combinational; watchdog 1 ms.
module tb_exp_approx;
  localparam int WD = 40;
  logic signed [WD-1:0] delta;
  logic [4:0] expo, mant;
  logic ovf, udf;
  int checks = 0, failures = 0;

  exp_approx #(.WD(WD), .F(7)) dut (.delta(delta), .expo(expo), .mant(mant), .ovf(ovf), .udf(udf));

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
    real x, approx, exact;
    for (int d = -1024; d < 0; d++) begin
      delta = WD'(d);
      #1;
      x = real'(d) / 128.0;
      exact  = $exp(x);
      approx = (2.0 ** (real'(expo) - 32.0)) * (1.0 + real'(mant) / 32.0);
      chk(!ovf && !udf, $sformatf("flags at %f", x));
      chk(approx > 0.9 * exact && approx < 1.1 * exact,
          $sformatf("Delta=%f approx %f exact %f", x, approx, exact));
    end
    for (int t = 0; t < 200; t++) begin
      delta = WD'($urandom_range(1 << 20));
      #1 chk(ovf, "ovf for Delta >= 0");
    end
    delta = WD'(-128 * 23);          // 2^-33 region: exponent below -32
    #1 chk(udf, "udf for Delta = -23");
    delta = WD'(-128 * 21);          // exp(-21) ~ 2^-30.3: representable
    #1 chk(!udf && !ovf, "no udf at Delta = -21");
    delta = -WD'(64'd1 << 36);
    #1 chk(udf, "udf for very negative Delta");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
