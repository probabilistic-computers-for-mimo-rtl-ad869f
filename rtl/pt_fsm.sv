// pt_fsm -- phase sequencer of the parallel-tempering core.
//
// Six states: Idle, Sweep, Energy, Acc, Infeas, Swap. A step on the beta path
// is Sweep (ssr cycles) -> Energy (1) -> Acc (ceil(N/D)+1) -> Swap (4), i.e.
// N_color*S + ceil(N/D) + 6 cycles when the host writes ssr = N_color*S. A step
// on the P path is Sweep (ssr) -> Infeas (1) -> Swap (4), ssr + 5 cycles.
// After the sweep the P path is taken when C > 1 and dir_b != dir_p; since
// dir_b toggles after every beta swap and dir_p after every P swap, a 2D array
// alternates beta and P steps and a single column (C = 1) takes only beta
// steps. The toggled direction flag also alternates even/odd pairing.
//
// This design leaves Idle for Sweep when en (clk_en from the run timer) is
// high and returns to Idle only at the end of a swap phase with en low, so a
// run always ends on a whole step (the source says the FSM returns to Idle
// when clk_en drops without saying at which point). The flags change on the
// clock edge that ends the swap phase. ssr = 0 is treated as 1.
//
// Interface: outputs are a Moore decode of the state plus the two direction
// registers; idle is high in Idle.
module pt_fsm #(
  parameter int C    = 6,
  parameter int NACC = 5    // ceil(N/D) + 1
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     en,
  input  logic [pt_pkg::SSR_W-1:0] ssr,
  output pt_pkg::pt_ctrl_t         ctrl,
  output pt_pkg::pt_state_e        state,
  output logic                     idle
);
  import pt_pkg::*;
  localparam int SWAP_CYC = 4;

  logic [SSR_W-1:0] cnt;
  logic             swap_is_b;
  logic             dir_b, dir_p;

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= ST_IDLE;
      cnt       <= '0;
      swap_is_b <= 1'b1;
      dir_b     <= 1'b0;
      dir_p     <= 1'b0;
    end else begin
      unique case (state)
        ST_IDLE: begin
          cnt <= '0;
          if (en) state <= ST_SWEEP;
        end
        ST_SWEEP: begin
          if (cnt + 1'b1 >= ssr) begin
            cnt   <= '0;
            state <= (C > 1 && (dir_b ^ dir_p)) ? ST_INFEAS : ST_ENERGY;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        ST_ENERGY: begin
          cnt   <= '0;
          state <= ST_ACC;
        end
        ST_ACC: begin
          if (cnt == SSR_W'(NACC - 1)) begin
            cnt       <= '0;
            swap_is_b <= 1'b1;
            state     <= ST_SWAP;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        ST_INFEAS: begin
          cnt       <= '0;
          swap_is_b <= 1'b0;
          state     <= ST_SWAP;
        end
        ST_SWAP: begin
          if (cnt == SSR_W'(SWAP_CYC - 1)) begin
            cnt <= '0;
            if (swap_is_b) dir_b <= ~dir_b;
            else           dir_p <= ~dir_p;
            state <= en ? ST_SWEEP : ST_IDLE;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  always_comb begin
    ctrl          = '0;
    ctrl.en_sweep = (state == ST_SWEEP);
    ctrl.en_acc   = (state == ST_ACC);
    ctrl.en_inf   = (state == ST_INFEAS);
    ctrl.en_b     = (state == ST_SWAP) &&  swap_is_b;
    ctrl.en_p     = (state == ST_SWAP) && !swap_is_b;
    ctrl.dir_b    = dir_b;
    ctrl.dir_p    = dir_p;
    idle          = (state == ST_IDLE);
  end
endmodule
