// tb_replica -- self-checking testbench for one replica (L = 4 logical
// nodes, N = 8 p-bits, E = 10 edges, stride D = 4). The control bundle is
// driven directly. The testbench builds the sparse graph on its own from
// the edge rule (dense edge (i,j), i<j: p-bit i to j+L when j-i is odd,
// i+L to j when even; copy edge i to i+L) and checks:
//   * energy = 2H = -2 sum_edges J s s - 2 sum h s of the current state,
//     ready after ceil(N/D) + 1 = 3 accumulation cycles (40 random problems);
//   * g = number of copy pairs that disagree, after one en_inf cycle;
//   * with strong ferromagnetic weights and positive bias all p-bits settle
//     to 1 after a few sweeps, and a strong negative bias alone gives 0;
//   * a swap load copies the chosen neighbour's state in one cycle;
//   * the best register captures (energy, state) on the first en_b cycle.
// Watchdog: 100000 cycles.
module tb_replica;
  import pt_pkg::*;
  localparam int L = 4, D = 4, N = 8;
  localparam int E = num_edges(L);
  localparam int WEL = we_local(max_degree(L));
  localparam int WE = WEL + $clog2(N);
  localparam int WG = $clog2(N / 2 + 1);
  logic clk = 1'b0, rst = 1'b1, rst_best = 1'b0;
  pt_ctrl_t ctrl;
  logic signed [WJ-1:0] j [E];
  logic signed [WH-1:0] h [N];
  logic [3:0] swap;
  logic [N-1:0] m_bm1, m_bp1, m_pm1, m_pp1, m, best_s;
  logic signed [WE-1:0] energy, best_e;
  logic [WG-1:0] g;
  int ea [E], eb [E];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  replica #(.L(L), .D(D), .ID(3)) dut (
    .clk(clk), .rst(rst), .rst_best(rst_best), .ctrl(ctrl), .j(j), .h(h), .swap(swap),
    .m_bm1(m_bm1), .m_bp1(m_bp1), .m_pm1(m_pm1), .m_pp1(m_pp1),
    .m(m), .energy(energy), .g(g), .best_e(best_e), .best_s(best_s));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic int ref_energy(input logic [N-1:0] s);
    int acc;
    acc = 0;
    for (int e = 0; e < E; e++)
      acc -= 2 * int'(j[e]) * (s[ea[e]] ? 1 : -1) * (s[eb[e]] ? 1 : -1);
    for (int p = 0; p < N; p++) acc -= 2 * int'(h[p]) * (s[p] ? 1 : -1);
    return acc;
  endfunction

  task automatic sweep(input int cycles);
    ctrl = '0; ctrl.en_sweep = 1'b1;
    repeat (cycles) @(negedge clk);
    ctrl = '0;
  endtask

  task automatic accumulate();
    ctrl = '0; ctrl.en_acc = 1'b1;
    repeat (N / D + 1) @(negedge clk);
    ctrl = '0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int k, cnt;
    logic [N-1:0] pat;
    k = 0;
    for (int a = 0; a < L; a++)
      for (int b = a + 1; b < L; b++) begin
        ea[k] = ((b - a) % 2 == 1) ? a : a + L;
        eb[k] = ((b - a) % 2 == 1) ? b + L : b;
        k++;
      end
    for (int a = 0; a < L; a++) begin ea[k] = a; eb[k] = a + L; k++; end
    ctrl = '0; swap = '0;
    m_bm1 = '0; m_bp1 = '0; m_pm1 = '0; m_pp1 = '0;
    for (int e = 0; e < E; e++) j[e] = '0;
    for (int p = 0; p < N; p++) h[p] = '0;
    repeat (2) @(negedge clk);
    rst = 1'b0;
    // energy of random problems and states
    for (int t = 0; t < 40; t++) begin
      for (int e = 0; e < E; e++) j[e] = WJ'($signed($urandom_range(80)) - 40);
      for (int p = 0; p < N; p++) h[p] = WH'($signed($urandom_range(80)) - 40);
      sweep(1 + $urandom_range(5));
      ctrl = '0; ctrl.en_acc = 1'b1;
      repeat (N / D) @(negedge clk);
      if (t < 10) chk(int'(energy) != ref_energy(m) || ref_energy(m) == 0, "energy not ready early");
      @(negedge clk);
      ctrl = '0;
      chk(int'(energy) == ref_energy(m), $sformatf("energy %0d want %0d", energy, ref_energy(m)));
      ctrl.en_inf = 1'b1;
      @(negedge clk);
      ctrl = '0;
      cnt = 0;
      for (int i = 0; i < L; i++) if (m[i] != m[i + L]) cnt++;
      chk(int'(g) == cnt, $sformatf("g %0d want %0d", g, cnt));
    end
    // ground states of a ferromagnet
    for (int e = 0; e < E; e++) j[e] = WJ'(40);
    for (int p = 0; p < N; p++) h[p] = WH'(16);
    sweep(30);
    chk(m == '1, "ferromagnet with positive bias settles to all ones");
    for (int e = 0; e < E; e++) j[e] = '0;
    for (int p = 0; p < N; p++) h[p] = WH'(-40);
    sweep(30);
    chk(m == '0, "strong negative bias alone gives all zeros");
    // best state: first en_b cycle captures the current energy
    rst_best = 1'b1;
    @(negedge clk);
    rst_best = 1'b0;
    accumulate();
    ctrl.en_b = 1'b1;
    @(negedge clk);
    chk(best_e == energy && best_s == m, "best captured on en_b");
    @(negedge clk); @(negedge clk);
    ctrl = '0;
    // swap loads from each neighbour
    for (int s = 0; s < 4; s++) begin
      pat = N'($urandom);
      m_bm1 = (s == 0) ? pat : ~pat;
      m_bp1 = (s == 1) ? pat : ~pat;
      m_pm1 = (s == 2) ? pat : ~pat;
      m_pp1 = (s == 3) ? pat : ~pat;
      swap = 4'(1 << s);
      @(negedge clk);
      swap = '0;
      chk(m == pat, $sformatf("swap load from source %0d", s));
      @(negedge clk);
      chk(m == pat, "state holds without enables");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
