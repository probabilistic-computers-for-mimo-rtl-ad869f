// ising_start -- control and load unit.
//
// Sequence on a rising edge of start (the host's control register):
//   1. if load_j is set, read R*C*E words from the J BRAM at addresses 0, 1,
//      .. and shift the low 10 bits of each into the J daisy chain;
//   2. if load_h is set, do the same for R*C*N words of the h BRAM;
//   3. run: clk_en is high for exactly `timer` cycles (the run timer);
//   4. wait until the PT core is idle (it finishes its current step), then
//      pulse rd_start so the core streams its best states to the readout;
//   5. when the readout reports finished, set done, which stays high until
//      the next start.
// Each daisy chain is a single shift register through which every word
// passes; after K words word t sits at position K-1-t, so word
// t = (r*C + c)*E + e lands on edge e of replica (r,c) (likewise
// (r*C + c)*N + p for bias p). Loading through one BRAM port costs one cycle
// per word plus one cycle of BRAM latency. rst_best_in is passed on,
// registered, to clear all best-energy registers without reloading.
// The order of J then h inside one start and the level semantics of load_j,
// load_h are this design's reading of the host protocol.
module ising_start #(
  parameter int L  = 16,
  parameter int R  = 9,
  parameter int C  = 6,
  parameter int N  = 2 * L,
  parameter int E  = pt_pkg::num_edges(L),
  parameter int KJ = R * C * E,
  parameter int KH = R * C * N,
  parameter int AJ = $clog2(KJ),
  parameter int AH = $clog2(KH)
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         start,
  input  logic                         load_j,
  input  logic                         load_h,
  input  logic                         rst_best_in,
  input  logic [pt_pkg::TIMER_W-1:0]   timer,
  output logic [AJ-1:0]                jb_addr,
  input  logic [31:0]                  jb_q,
  output logic [AH-1:0]                hb_addr,
  input  logic [31:0]                  hb_q,
  output logic signed [pt_pkg::WJ-1:0] j_all [R*C][E],
  output logic signed [pt_pkg::WH-1:0] h_all [R*C][N],
  output logic                         clk_en,
  output logic                         rst_best,
  output logic                         rd_start,
  input  logic                         pt_idle,
  input  logic                         rd_finished,
  output logic                         done
);
  import pt_pkg::*;

  typedef enum logic [2:0] {
    S_IDLE, S_LOAD_J, S_LOAD_H, S_RUN, S_DRAIN, S_READ
  } st_e;

  st_e                  st;
  logic                 start_d;
  logic [31:0]          cnt;
  logic                 rd_v;       // BRAM data of the previous address valid
  logic [TIMER_W-1:0]   tmr;
  logic signed [WJ-1:0] jchain [KJ];
  logic signed [WH-1:0] hchain [KH];

  always_ff @(posedge clk) begin
    if (rst) begin
      st       <= S_IDLE;
      start_d  <= 1'b0;
      cnt      <= '0;
      rd_v     <= 1'b0;
      tmr      <= '0;
      done     <= 1'b0;
      rd_start <= 1'b0;
      rst_best <= 1'b0;
    end else begin
      start_d  <= start;
      rd_start <= 1'b0;
      rst_best <= rst_best_in;
      unique case (st)
        S_IDLE: begin
          if (start && !start_d) begin
            done <= 1'b0;
            cnt  <= '0;
            rd_v <= 1'b0;
            tmr  <= timer;
            st   <= load_j ? S_LOAD_J : (load_h ? S_LOAD_H : S_RUN);
          end
        end
        S_LOAD_J: begin
          rd_v <= (cnt < KJ);
          if (cnt < KJ) cnt <= cnt + 1;
          if (!(cnt < KJ) && rd_v) begin
            cnt  <= '0;
            rd_v <= 1'b0;
            st   <= load_h ? S_LOAD_H : S_RUN;
          end
        end
        S_LOAD_H: begin
          rd_v <= (cnt < KH);
          if (cnt < KH) cnt <= cnt + 1;
          if (!(cnt < KH) && rd_v) begin
            cnt  <= '0;
            rd_v <= 1'b0;
            st   <= S_RUN;
          end
        end
        S_RUN: begin
          if (tmr != 0) tmr <= tmr - 1'b1;
          else          st  <= S_DRAIN;
        end
        S_DRAIN: begin
          if (pt_idle) begin
            rd_start <= 1'b1;
            st       <= S_READ;
          end
        end
        S_READ: begin
          if (rd_finished && !rd_start) begin
            done <= 1'b1;
            st   <= S_IDLE;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // daisy chains: shift on every valid BRAM word of the matching phase
  logic shift_j, shift_h;
  assign shift_j = (st == S_LOAD_J) && rd_v;
  assign shift_h = (st == S_LOAD_H) && rd_v;

  for (genvar k = 0; k < KJ; k++) begin : g_jc
    initial jchain[k] = '0;
    always_ff @(posedge clk)
      if (shift_j) jchain[k] <= (k == 0) ? jb_q[WJ-1:0] : jchain[(k == 0) ? 0 : k - 1];
  end

  for (genvar k = 0; k < KH; k++) begin : g_hc
    initial hchain[k] = '0;
    always_ff @(posedge clk)
      if (shift_h) hchain[k] <= (k == 0) ? hb_q[WH-1:0] : hchain[(k == 0) ? 0 : k - 1];
  end

  for (genvar q = 0; q < R * C; q++) begin : g_map
    for (genvar e = 0; e < E; e++) begin : g_j
      assign j_all[q][e] = jchain[KJ - 1 - (q * E + e)];
    end
    for (genvar p = 0; p < N; p++) begin : g_h
      assign h_all[q][p] = hchain[KH - 1 - (q * N + p)];
    end
  end

  assign jb_addr = AJ'(cnt);
  assign hb_addr = AH'(cnt);
  assign clk_en  = (st == S_RUN) && (tmr != 0);
endmodule
