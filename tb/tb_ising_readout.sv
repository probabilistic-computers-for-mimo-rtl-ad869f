// tb_ising_readout -- self-checking testbench for the readout writer.
// Streams bursts of NW = 5 words and checks that word k is written to
// address k on the cycle it is valid, that nothing is written outside a
// burst and that finished rises at the end of each burst and clears when
// the next one starts. Watchdog: 10000 cycles.
module tb_ising_readout;
  localparam int NW = 5, AW = 3;
  logic clk = 1'b0, rst = 1'b1, s_valid = 1'b0;
  logic [31:0] s_word = '0, din;
  logic we, finished;
  logic [AW-1:0] addr;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  ising_readout #(.NW(NW), .AW(AW)) dut (
    .clk(clk), .rst(rst), .s_valid(s_valid), .s_word(s_word),
    .we(we), .addr(addr), .din(din), .finished(finished));

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
    repeat (2) @(negedge clk);
    rst = 1'b0;
    chk(!finished && !we, "quiet after reset");
    for (int b = 0; b < 4; b++) begin
      for (int k = 0; k < NW; k++) begin
        s_valid = 1'b1; s_word = $urandom;
        #1;
        chk(we && int'(addr) == k && din == s_word, $sformatf("burst %0d word %0d", b, k));
        if (k == 0 && b > 0) begin
          @(negedge clk);
          chk(!finished, "finished clears on a new burst");
        end else @(negedge clk);
      end
      s_valid = 1'b0;
      #1 chk(!we, "no write after the burst");
      @(negedge clk);
      chk(finished, "finished after the burst");
      repeat ($urandom_range(5)) begin
        @(negedge clk);
        chk(!we && finished, "idle between bursts");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
