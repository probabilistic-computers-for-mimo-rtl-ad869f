// tb_tanh_lut -- self-checking testbench for the tanh probability table.
// For every legal input I in [-63, 63] (3 fraction bits) the output must be
// 2^32 * (1 + tanh(I/8)) / 2, computed here with the real-valued $tanh,
// within 2 LSB below saturation, 2^32-1 for I >= 32 and its two's
// complement (1 for I <= -32). Also checks monotonicity. Purely
// combinational: no cycle counts apply. Watchdog: 10 us.
module tb_tanh_lut;
  logic [6:0]  i_field;
  logic [31:0] prob;
  int checks = 0, failures = 0;
  longint prev;

  tanh_lut dut (.i_field(i_field), .prob(prob));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #10000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    real x, want;
    longint w, got;
    prev = -1;
    for (int i = -63; i <= 63; i++) begin
      i_field = 7'(i);
      #1;
      got = longint'(prob);
      x = real'(i) / 8.0;
      if (i >= 32)       w = 64'hFFFF_FFFF;
      else if (i <= -32) w = 1;
      else begin
        want = 4294967296.0 * (1.0 + $tanh(x)) / 2.0;
        w = longint'(want);
      end
      chk(got - w <= 2 && w - got <= 2, $sformatf("I=%0d got %h want %h", i, got, w));
      chk(got >= prev, $sformatf("monotone at I=%0d", i));
      prev = got;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
