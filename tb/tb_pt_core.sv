// tb_pt_core -- self-checking testbench for the 2D parallel-tempering core,
// reduced to L = 4 logical nodes (N = 8 p-bits), R = 4 beta rows and C = 3
// P columns, D = 4, S = 10 (ssr = 30). The testbench:
//   * builds a random dense 4-spin problem with a unique ground state
//     (brute force), scales it per replica by beta_r (and P_c on the copy
//     edges) exactly as the host would, and drives the core;
//   * watches every beta-pair and P-pair swap strobe and checks that the two
//     replicas really exchange their states on that cycle;
//   * checks that beta and P swaps both happen, and that the distance from
//     one beta swap phase to the next is one beta step plus one P step,
//     (3S + ceil(N/d) + 6) + (3S + 5) = 38 + 35 cycles;
//   * stops the core, checks idle, starts a readout and checks that the
//     streamed word holds the best states of the last column, row 0 first;
//   * checks that the coldest replica of the strongest column found the
//     dense ground state, with both copies of every node equal.
// Watchdog: 200000 cycles.
module tb_pt_core;
  import pt_pkg::*;
  localparam int L = 4, R = 4, C = 3, D = 4, N = 8;
  localparam int E = num_edges(L);
  localparam int NW = (R * N + 31) / 32;
  localparam int BM [R] = '{250, 500, 1000, 2000};
  localparam int PM [C] = '{500, 1000, 2000};
  localparam int S = 10;
  logic clk = 1'b0, rst = 1'b1, en = 1'b0, rst_best = 1'b0, rd_start = 1'b0;
  logic [SSR_W-1:0] ssr = SSR_W'(3 * S);
  logic signed [WJ-1:0] j_all [R*C][E];
  logic signed [WH-1:0] h_all [R*C][N];
  logic idle, s_valid;
  logic [31:0] s_word;
  int jd [L][L], hd [L];
  int checks = 0, failures = 0;
  int nswap_b = 0, nswap_p = 0;
  always #5 clk = ~clk;

  pt_core #(.L(L), .R(R), .C(C), .D(D), .BETA_M(BM), .P_M(PM)) dut (
    .clk(clk), .rst(rst), .en(en), .ssr(ssr), .rst_best(rst_best),
    .j_all(j_all), .h_all(h_all), .rd_start(rd_start),
    .idle(idle), .s_valid(s_valid), .s_word(s_word));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic int dense_h(input int s);   // 8 x energy of spins s
    int acc;
    acc = 0;
    for (int a = 0; a < L; a++) begin
      for (int b = a + 1; b < L; b++)
        acc -= jd[a][b] * (s[a] ? 1 : -1) * (s[b] ? 1 : -1);
      acc -= hd[a] * (s[a] ? 1 : -1);
    end
    return acc;
  endfunction

  function automatic int rnd(input int num, input int den);
    return (num >= 0) ? (num + den / 2) / den : -((-num + den / 2) / den);
  endfunction

  // swap checking at the falling edge: strobes seen now must have exchanged
  // the pair's states by the next falling edge
  logic [N-1:0] pre_m [R][C];
  logic         pend_b [C][R], pend_p [R][C];
  always @(negedge clk) begin
    if (!rst) begin
      for (int c = 0; c < C; c++)
        for (int r = 0; r < R - 1; r++) if (pend_b[c][r])
          chk(dut.m[r][c] == pre_m[r+1][c] && dut.m[r+1][c] == pre_m[r][c],
              $sformatf("beta swap (%0d,%0d) col %0d exchanged", r, r + 1, c));
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C - 1; c++) if (pend_p[r][c])
          chk(dut.m[r][c] == pre_m[r][c+1] && dut.m[r][c+1] == pre_m[r][c],
              $sformatf("P swap (%0d,%0d) row %0d exchanged", c, c + 1, r));
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++) begin
          pre_m[r][c]  = dut.m[r][c];
          pend_b[c][r] = (r < R - 1) ? dut.pb[c][(r < R - 1) ? r : 0] : 1'b0;
          pend_p[r][c] = (c < C - 1) ? dut.pp[r][(c < C - 1) ? c : 0] : 1'b0;
          nswap_b += int'(pend_b[c][r]);
          nswap_p += int'(pend_p[r][c]);
        end
    end
  end

  // distance between the starts of consecutive beta swap phases
  int cyc = 0, last_b = -1, nper = 0, badper = 0;
  logic en_b_q = 1'b0;
  always @(posedge clk) begin
    cyc++;
    en_b_q <= dut.ctrl_fsm.en_b;
    if (dut.ctrl_fsm.en_b && !en_b_q) begin
      if (last_b >= 0) begin
        nper++;
        if (cyc - last_b != (3 * S + N / D + 6) + (3 * S + 5)) badper++;
      end
      last_b = cyc;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int best, nbest, gs, k, q;
    logic [R*N-1:0] want;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      pend_b[c][r] = 1'b0; pend_p[r][c] = 1'b0; pre_m[r][c] = '0;
    end
    // random dense problem (units of 1/8) with a unique ground state
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
    end while (nbest != 1 || dense_h(gs) + 16 > dense_h(gs ^ 1));
    // per-replica weights: beta_r * J, beta_r * P_c on copy edges, h split
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      q = r * C + c;
      k = 0;
      for (int a = 0; a < L; a++) for (int b = a + 1; b < L; b++) begin
        j_all[q][k] = WJ'(rnd(jd[a][b] * BM[r], 1000)); k++;
      end
      for (int a = 0; a < L; a++) begin
        j_all[q][k] = WJ'(rnd(8 * PM[c] * BM[r], 1000000)); k++;
        h_all[q][a]     = WH'(rnd(hd[a] * BM[r], 2000));
        h_all[q][a + L] = WH'(rnd(hd[a] * BM[r], 2000));
      end
    end
    repeat (3) @(negedge clk);
    rst = 1'b0;
    chk(idle, "idle after reset");
    en = 1'b1;
    repeat (20000) @(negedge clk);
    en = 1'b0;
    k = 0;
    while (!idle && k < 500) begin @(negedge clk); k++; end
    chk(idle, "idle after en drops");
    chk(nswap_b > 0 && nswap_p > 0, $sformatf("swaps beta %0d P %0d", nswap_b, nswap_p));
    chk(nper > 50 && badper == 0, $sformatf("step periods %0d, wrong %0d", nper, badper));
    // readout
    for (int r = 0; r < R; r++) want[(R - r) * N - 1 -: N] = dut.best_s[r][C-1];
    rd_start = 1'b1;
    @(negedge clk);
    rd_start = 1'b0;
    k = 0;
    while (s_valid) begin
      chk(s_word == want[R*N-1 -: 32], "readout word");
      k++;
      @(negedge clk);
    end
    chk(k == NW, $sformatf("s_valid for %0d cycles", k));
    chk(want[N-1:0] == {4'(gs), 4'(gs)},
        $sformatf("coldest strongest replica best %b, ground state %b", want[N-1:0], 4'(gs)));
    $display("beta swaps %0d, P swaps %0d", nswap_b, nswap_p);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
