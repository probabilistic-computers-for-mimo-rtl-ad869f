// tb_ising_start -- self-checking testbench for the control-and-load unit,
// with L = 4, R = 2, C = 2 (40 J words, 32 h words). BRAM models with one
// cycle of read latency feed the unit. Checks:
//   * after a start with load_j and load_h every j_all / h_all entry holds
//     the word written at address (r*C+c)*E+e / (r*C+c)*N+p;
//   * loading takes KJ + KH words plus one cycle of latency per memory;
//   * clk_en is high for exactly `timer` cycles, once;
//   * rd_start pulses once, only after pt_idle, and done rises only after
//     rd_finished; done stays high until the next start;
//   * a start without load flags runs without touching the chains;
//   * rst_best is passed on one cycle later.
// Watchdog: 20000 cycles.
module tb_ising_start;
  import pt_pkg::*;
  localparam int L = 4, R = 2, C = 2, N = 8;
  localparam int E = num_edges(L);
  localparam int KJ = R * C * E, KH = R * C * N;
  localparam int AJ = $clog2(KJ), AH = $clog2(KH);
  logic clk = 1'b0, rst = 1'b1;
  logic start = 1'b0, load_j = 1'b0, load_h = 1'b0, rst_best_in = 1'b0;
  logic [TIMER_W-1:0] timer;
  logic [AJ-1:0] jb_addr;
  logic [AH-1:0] hb_addr;
  logic [31:0] jb_q, hb_q;
  logic signed [WJ-1:0] j_all [R*C][E];
  logic signed [WH-1:0] h_all [R*C][N];
  logic clk_en, rst_best, rd_start, pt_idle = 1'b1, rd_finished = 1'b0, done;
  logic [31:0] jmem [1 << AJ], hmem [1 << AH];
  int checks = 0, failures = 0;
  int n_en = 0, n_rd = 0, en_before_rd = 0;
  always #5 clk = ~clk;

  ising_start #(.L(L), .R(R), .C(C)) dut (
    .clk(clk), .rst(rst), .start(start), .load_j(load_j), .load_h(load_h),
    .rst_best_in(rst_best_in), .timer(timer),
    .jb_addr(jb_addr), .jb_q(jb_q), .hb_addr(hb_addr), .hb_q(hb_q),
    .j_all(j_all), .h_all(h_all), .clk_en(clk_en), .rst_best(rst_best),
    .rd_start(rd_start), .pt_idle(pt_idle), .rd_finished(rd_finished), .done(done));

  always_ff @(posedge clk) begin
    jb_q <= jmem[jb_addr];
    hb_q <= hmem[hb_addr];
  end

  always @(posedge clk) if (!rst) begin
    n_en += int'(clk_en);
    if (rd_start) begin
      n_rd++;
      if (!pt_idle) en_before_rd++;
    end
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic check_chains();
    int bad;
    bad = 0;
    for (int q = 0; q < R * C; q++) begin
      for (int e = 0; e < E; e++) if (j_all[q][e] != WJ'(jmem[q * E + e])) bad++;
      for (int p = 0; p < N; p++) if (h_all[q][p] != WH'(hmem[q * N + p])) bad++;
    end
    chk(bad == 0, $sformatf("%0d chain entries wrong", bad));
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int t0, t;
    for (int k = 0; k < (1 << AJ); k++) jmem[k] = $urandom;
    for (int k = 0; k < (1 << AH); k++) hmem[k] = $urandom;
    timer = 100;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    // run 1: load both, run for 100 cycles, PT core busy for a while
    load_j = 1'b1; load_h = 1'b1;
    start = 1'b1; pt_idle = 1'b0;
    t0 = 0;
    @(negedge clk);
    while (!clk_en && t0 < 1000) begin @(negedge clk); t0++; end
    chk(t0 >= KJ + KH && t0 <= KJ + KH + 3, $sformatf("load took %0d cycles", t0));
    check_chains();
    t = 0;
    while (clk_en) begin @(negedge clk); t++; end
    chk(t == 100, $sformatf("clk_en high %0d cycles", t));
    repeat (20) @(negedge clk);
    chk(n_rd == 0, "no readout while the core is busy");
    pt_idle = 1'b1;
    @(negedge clk); @(negedge clk);
    chk(n_rd == 1 && en_before_rd == 0, "one readout after idle");
    repeat (5) @(negedge clk);
    chk(!done, "done waits for the readout");
    rd_finished = 1'b1;
    @(negedge clk); @(negedge clk);
    chk(done, "done after readout finished");
    start = 1'b0;
    repeat (5) @(negedge clk);
    chk(done && n_en == 100, "done holds, no extra run");
    // run 2: no reload, new memory contents must not reach the chains
    for (int k = 0; k < (1 << AJ); k++) jmem[k] = ~jmem[k];
    load_j = 1'b0; load_h = 1'b0; rd_finished = 1'b0;
    timer = 7;
    start = 1'b1;
    @(negedge clk);
    chk(!done, "done clears on start");
    for (int k = 0; k < (1 << AJ); k++) jmem[k] = ~jmem[k];
    repeat (12) @(negedge clk);
    check_chains();
    chk(n_en == 107, $sformatf("second run enabled %0d cycles", n_en - 100));
    rd_finished = 1'b1;
    repeat (4) @(negedge clk);
    chk(done && n_rd == 2, "second run done");
    // rst_best pass-through
    rst_best_in = 1'b1;
    @(negedge clk);
    chk(rst_best, "rst_best passed on");
    rst_best_in = 1'b0;
    @(negedge clk);
    chk(!rst_best, "rst_best released");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
