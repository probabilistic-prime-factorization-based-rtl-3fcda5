// Controller of the probabilistic annealing schedule.
//
// After `start` the controller spends one cycle in INIT (the core loads N,
// the LFSR seeds and the start values of X and Y), then runs. While it runs,
// every clock is one sampling operation and the cycles alternate between
// updating X (PH_X) and updating Y (PH_Y). After each Y update the annealing
// shift s of the cost function goes up by one (E << 1); after the fourth pair
// it returns to 0, restoring the original E (`iter_end` marks that cycle), so
// one search iteration is 8 samplings, 4 of X and 4 of Y, at s = 0,1,2,3.
// `stop` (a factor found) ends the run: that cycle no longer samples and the
// controller waits in DONE until the next `start`, which may also come
// while running and restarts the search. `op_time` counts the samplings of
// the current run (64 bits). `update` is high in every sampling cycle.
// The alternation, the left shift per X/Y pair and the reset after 8
// samplings are the paper's; the INIT cycle, the restart rule and counting
// time in samplings are this design's choices.
module anneal_ctrl
  import pf_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        stop,
  output run_state_e  state,
  output logic        init,
  output logic        update,
  output phase_e      phase,
  output logic [1:0]  shift,
  output logic        iter_end,
  output logic [63:0] op_time
);

  assign init     = (state == ST_INIT);
  assign update   = (state == ST_RUN) && !stop;
  assign iter_end = update && (phase == PH_Y) && (shift == 2'd3);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= ST_IDLE;
      phase   <= PH_X;
      shift   <= '0;
      op_time <= '0;
    end else begin
      unique case (state)
        ST_IDLE: if (start) state <= ST_INIT;
        ST_INIT: begin
          state   <= ST_RUN;
          phase   <= PH_X;
          shift   <= '0;
          op_time <= '0;
        end
        ST_RUN: begin
          if (start)     state <= ST_INIT;
          else if (stop) state <= ST_DONE;
          else begin
            op_time <= op_time + 64'd1;
            if (phase == PH_X) phase <= PH_Y;
            else begin
              phase <= PH_X;
              shift <= shift + 2'd1;   // 3 -> 0 restores the original E
            end
          end
        end
        ST_DONE: if (start) state <= ST_INIT;
        default: state <= ST_IDLE;
      endcase
    end
  end

endmodule
