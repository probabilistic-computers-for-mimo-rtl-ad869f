// tb_ising_machine -- end-to-end testbench of the whole machine through its
// host ports, reduced to L = 4 (N = 8 p-bits), R = 4 beta rows, C = 3 P
// columns, D = 4. Sequence, as a host would do it:
//   1. write beta- and P-scaled weights of a random 4-spin problem with a
//      unique ground state into the J and h BRAMs and read some back;
//   2. set ssr = 3S (S = 10) and the run timer, raise start with load_j and
//      load_h, poll done, read the state BRAM;
//   3. check that the coldest replica of the strongest column holds the
//      ground state, both copies equal;
//   4. run again with rst_best and without reloading, check the same answer.
// Each mechanism of the design is counted and must occur at least once:
// J words loaded, h words loaded, run-timer cycles, sweeps, energy
// accumulations, infeasibility counts, beta swaps, P swaps, best-state
// updates, best-state clears, readout words, done.
// Watchdog: 300000 cycles.
module tb_ising_machine;
  import pt_pkg::*;
  localparam int L = 4, R = 4, C = 3, D = 4, N = 8;
  localparam int E = num_edges(L);
  localparam int KJ = R * C * E, KH = R * C * N;
  localparam int NW = (R * N + 31) / 32;
  localparam int AJ = $clog2(KJ), AH = $clog2(KH), AS = (NW > 1) ? $clog2(NW) : 1;
  localparam int BM [R] = '{250, 500, 1000, 2000};
  localparam int PM [C] = '{500, 1000, 2000};
  localparam int S = 10;
  logic clk = 1'b0, rst = 1'b1;
  logic j_we = 1'b0, h_we = 1'b0;
  logic [AJ-1:0] j_addr = '0;
  logic [AH-1:0] h_addr = '0;
  logic [31:0] j_din = '0, h_din = '0, j_dout, h_dout, s_dout;
  logic [AS-1:0] s_addr = '0;
  logic start = 1'b0, load_j = 1'b0, load_h = 1'b0, rst_best = 1'b0, done;
  logic [SSR_W-1:0] ssr = SSR_W'(3 * S);
  logic [TIMER_W-1:0] timer = 32'd20000;
  int jd [L][L], hd [L];
  int checks = 0, failures = 0;
  // mechanism counters
  int n_jload = 0, n_hload = 0, n_run = 0, n_sweep = 0, n_acc = 0, n_inf = 0;
  int n_bswap = 0, n_pswap = 0, n_best = 0, n_clear = 0, n_rdword = 0, n_done = 0;
  always #5 clk = ~clk;

  ising_machine #(.L(L), .R(R), .C(C), .D(D), .BETA_M(BM), .P_M(PM)) dut (
    .clk(clk), .rst(rst),
    .j_we(j_we), .j_addr(j_addr), .j_din(j_din), .j_dout(j_dout),
    .h_we(h_we), .h_addr(h_addr), .h_din(h_din), .h_dout(h_dout),
    .s_addr(s_addr), .s_dout(s_dout),
    .start(start), .load_j(load_j), .load_h(load_h), .rst_best(rst_best),
    .ssr(ssr), .timer(timer), .done(done));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [WE_T-1:0] prev_best;
  localparam int WE_T = we_local(max_degree(L)) + $clog2(N);
  logic done_q = 1'b0;
  always @(posedge clk) if (!rst) begin
    n_jload += int'(dut.u_start.shift_j);
    n_hload += int'(dut.u_start.shift_h);
    n_run   += int'(dut.clk_en);
    n_sweep += int'(dut.u_pt.ctrl.en_sweep);
    n_acc   += int'(dut.u_pt.ctrl.en_acc);
    n_inf   += int'(dut.u_pt.ctrl.en_inf);
    for (int c = 0; c < C; c++) for (int r = 0; r < R - 1; r++) n_bswap += int'(dut.u_pt.pb[c][r]);
    for (int r = 0; r < R; r++) for (int c = 0; c < C - 1; c++) n_pswap += int'(dut.u_pt.pp[r][c]);
    if (dut.u_pt.best_e[R-1][C-1] != prev_best) n_best++;
    prev_best <= dut.u_pt.best_e[R-1][C-1];
    n_clear += int'(dut.pt_rst_best);
    n_rdword += int'(dut.s_we);
    done_q <= done;
    if (done && !done_q) n_done++;
  end

  initial begin
    repeat (300000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  function automatic int dense_h(input int s);
    int acc;
    acc = 0;
    for (int a = 0; a < L; a++) begin
      for (int b = a + 1; b < L; b++) acc -= jd[a][b] * (s[a] ? 1 : -1) * (s[b] ? 1 : -1);
      acc -= hd[a] * (s[a] ? 1 : -1);
    end
    return acc;
  endfunction

  function automatic int rnd(input int num, input int den);
    return (num >= 0) ? (num + den / 2) / den : -((-num + den / 2) / den);
  endfunction

  task automatic run_and_read(input bit lj, input bit lh, output logic [31:0] w [NW]);
    int t;
    load_j = lj; load_h = lh;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    t = 0;
    while (!done && t < 100000) begin @(negedge clk); t++; end
    chk(done, "done raised");
    chk(t >= int'(timer), $sformatf("run took %0d cycles, timer %0d", t, timer));
    for (int k = 0; k < NW; k++) begin
      s_addr = AS'(k);
      @(negedge clk);
      w[k] = s_dout;
    end
  endtask

  initial begin
    int best, nbest, gs, k, q, t;
    logic [31:0] w [NW];
    logic [31:0] jw [KJ], hw [KH];
    prev_best = '0;
    do begin
      for (int a = 0; a < L; a++) begin
        hd[a] = 2 * ($urandom_range(16) - 8);
        for (int b = 0; b < L; b++) jd[a][b] = 0;
        for (int b = a + 1; b < L; b++) jd[a][b] = $urandom_range(32) - 16;
      end
      best = 1 << 30; nbest = 0; gs = 0;
      for (int s = 0; s < (1 << L); s++) begin
        if (dense_h(s) < best) begin best = dense_h(s); nbest = 1; gs = s; end
        else if (dense_h(s) == best) nbest++;
      end
    end while (nbest != 1);
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      q = r * C + c;
      k = 0;
      for (int a = 0; a < L; a++) for (int b = a + 1; b < L; b++) begin
        jw[q * E + k] = 32'(rnd(jd[a][b] * BM[r], 1000)); k++;
      end
      for (int a = 0; a < L; a++) begin
        jw[q * E + k] = 32'(rnd(8 * PM[c] * BM[r], 1000000)); k++;
        hw[q * N + a]     = 32'(rnd(hd[a] * BM[r], 2000));
        hw[q * N + a + L] = 32'(rnd(hd[a] * BM[r], 2000));
      end
    end
    repeat (3) @(negedge clk);
    rst = 1'b0;
    // 1. host writes
    for (int a = 0; a < KJ; a++) begin
      j_we = 1'b1; j_addr = AJ'(a); j_din = jw[a]; @(negedge clk);
    end
    j_we = 1'b0;
    for (int a = 0; a < KH; a++) begin
      h_we = 1'b1; h_addr = AH'(a); h_din = hw[a]; @(negedge clk);
    end
    h_we = 1'b0;
    for (int a = 0; a < KJ; a += 7) begin
      j_addr = AJ'(a); @(negedge clk);
      chk(j_dout == jw[a], "J BRAM read back");
    end
    // 2./3. first run
    run_and_read(1'b1, 1'b1, w);
    chk(n_jload == KJ && n_hload == KH, $sformatf("loaded %0d J, %0d h words", n_jload, n_hload));
    chk(n_run == int'(timer), $sformatf("run timer cycles %0d", n_run));
    chk(w[NW-1][31 - (R * N - N) % 32 -: N] == {4'(gs), 4'(gs)},
        $sformatf("ground state: read %h, want %b", w[NW-1], 4'(gs)));
    // 4. clear the best registers, run again without reloading
    rst_best = 1'b1;
    @(negedge clk);
    rst_best = 1'b0;
    @(negedge clk);
    chk(dut.u_pt.best_e[R-1][C-1] == {1'b0, {(WE_T-1){1'b1}}}, "rst_best clears the best energy");
    t = n_jload;
    timer = 32'd5000;
    run_and_read(1'b0, 1'b0, w);
    chk(n_jload == t, "no reload without load_j");
    chk(w[NW-1][31 - (R * N - N) % 32 -: N] == {4'(gs), 4'(gs)}, "ground state after rerun");
    // every mechanism must have happened
    chk(n_jload > 0, "J load");
    chk(n_hload > 0, "h load");
    chk(n_run > 0, "run timer");
    chk(n_sweep > 0, "sweeps");
    chk(n_acc > 0, "energy accumulation");
    chk(n_inf > 0, "infeasibility count");
    chk(n_bswap > 0, "beta swaps");
    chk(n_pswap > 0, "P swaps");
    chk(n_best > 0, "best-state updates");
    chk(n_clear > 0, "best-state clear");
    chk(n_rdword == 2 * NW, $sformatf("readout words %0d", n_rdword));
    chk(n_done == 2, "done twice");
    $display("counts: J %0d h %0d run %0d sweep %0d acc %0d inf %0d bswap %0d pswap %0d best %0d clear %0d rd %0d done %0d",
             n_jload, n_hload, n_run, n_sweep, n_acc, n_inf, n_bswap, n_pswap, n_best, n_clear, n_rdword, n_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
