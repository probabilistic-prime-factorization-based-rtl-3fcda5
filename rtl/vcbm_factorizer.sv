// Probabilistic factorization machine core: virtually connected Boltzmann
// machine, candidate sieve and decision block.
//
// The state is two odd factor registers X and Y of FW bits. One bank of
// NPB = FW-1 p-bits samples bits [FW-1:1] of X in one cycle and of Y in the
// next; bit 0 stays 1. Each cycle the energy calculator derives all p-bit
// inputs from N and the current X and Y, and the p-bits' samples replace the
// factor being updated, so a whole factor is sampled per clock. The
// annealing controller alternates X and Y and shifts the cost function left
// once per X/Y pair, restoring it after 8 samplings.
// Only the low half of the factor bits is active: with n the bit count of N,
// bits [ceil(n/2)-1:1] are sampled and bits above are held at 0, so one
// build factors any N of up to NW bits. X and Y start at
// 2^(ceil(n/2)-1) + 1.
// In the cycle after a factor is updated, the candidate sieve picks its best
// neighbour, which enters the decision block's X or Y modulo operator; a
// zero remainder two clocks later stops the run and latches
// (x_out, y_out) = (divisor, N / divisor), the divisor in x_out when it came
// from X. With `decision_en` low the decision block is unused and the run
// stops only when X*Y = N (the paper's reference mode); `sieve_en` low
// sends X and Y to the modulo operators unchanged.
// Interface: N, seed and the two enables are taken on `start`; `busy` is
// high from `start` to the end of the run, `done` when a result is held.
// The architecture, sizes and schedule are the paper's; the start value of
// X and Y, the active-bit rule and the configuration inputs are this
// design's choices.
module vcbm_factorizer
  import pf_pkg::*;
#(
  parameter int unsigned NW  = 64,
  parameter int unsigned FW  = 32,
  parameter int unsigned NPB = FW - 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] n_in,
  input  logic [31:0]   seed,
  input  logic          sieve_en,
  input  logic          decision_en,
  output logic          busy,
  output logic          done,
  output logic [NW-1:0] x_out,
  output logic [NW-1:0] y_out,
  output logic [63:0]   op_time,
  output logic [FW-1:0] x_state,
  output logic [FW-1:0] y_state,
  output phase_e        phase,
  output logic [1:0]    shift,
  output logic          iter_end,
  output sieve_sel_e    sieve_sel
);

  localparam int unsigned NBW = $clog2(NW + 1);

  // ---------------------------------------------------------------- control
  run_state_e    state;
  logic          init, update, stop;

  anneal_ctrl u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .stop(stop), .state(state), .init(init),
    .update(update), .phase(phase), .shift(shift), .iter_end(iter_end), .op_time(op_time)
  );

  assign busy = (state == ST_INIT) || (state == ST_RUN);
  assign done = (state == ST_DONE);

  // --------------------------------------------------- problem and options
  logic [NW-1:0]  n_q;
  logic [31:0]    seed_q;
  logic           sieve_en_q, decision_en_q;
  logic [NBW-1:0] nbits_q;
  logic [FW-1:0]  act_q;            // sampled factor bits

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_q           <= '0;
      seed_q        <= '0;
      sieve_en_q    <= 1'b1;
      decision_en_q <= 1'b1;
    end else if (start) begin
      n_q           <= n_in;
      seed_q        <= seed;
      sieve_en_q    <= sieve_en;
      decision_en_q <= decision_en;
    end
  end

  // Bit count of N and the active factor bits, computed in INIT.
  logic [NBW-1:0] nbits_d;
  logic [FW-1:0]  act_d, x_init;
  always_comb begin
    int half;
    nbits_d = '0;
    for (int i = 0; i < int'(NW); i++) if (n_q[i]) nbits_d = NBW'(i + 1);
    half = (int'(nbits_d) + 1) / 2;
    if (half > int'(FW)) half = int'(FW);
    if (half < 2)        half = 2;
    act_d = '0;
    for (int k = 1; k < int'(FW); k++) act_d[k] = (k < half);
    x_init = '0;
    x_init[half-1] = 1'b1;
    x_init[0]      = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nbits_q <= '0;
      act_q   <= '0;
    end else if (init) begin
      nbits_q <= nbits_d;
      act_q   <= act_d;
    end
  end

  // --------------------------------------------- energy calculator, p-bits
  logic [FW-1:0] x_q, y_q, u, v;
  logic [7:0]    ik [NPB];
  logic [NPB-1:0] smp;
  logic [47:0]   lfsr_seed [NPB];
  logic          exact;

  assign u = (phase == PH_X) ? x_q : y_q;
  assign v = (phase == PH_X) ? y_q : x_q;

  energy_calculator #(.NW(NW), .FW(FW), .NPB(NPB), .NBW(NBW)) u_ecalc (
    .n_val(n_q), .n_bits(nbits_q), .shift(shift), .u(u), .v(v), .ik(ik), .exact(exact)
  );

  seed_gen #(.NPB(NPB)) u_seed (.seed(seed_q), .lfsr_seed(lfsr_seed));

  for (genvar j = 0; j < int'(NPB); j++) begin : g_pbit
    pbit u_pbit (
      .clk(clk), .rst_n(rst_n), .load(init), .seed(lfsr_seed[j]), .en(update),
      .ik(ik[j]), .s(smp[j])
    );
  end

  logic [FW-1:0] sampled;
  assign sampled = {smp, 1'b1} & (act_q | FW'(1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q <= FW'(1);
      y_q <= FW'(1);
    end else if (init) begin
      x_q <= x_init;
      y_q <= x_init;
    end else if (update) begin
      if (phase == PH_X) x_q <= sampled;
      else               y_q <= sampled;
    end
  end

  assign x_state = x_q;
  assign y_state = y_q;

  // ------------------------------------------ candidate sieve and decision
  logic [FW-1:0] sv_in, best;
  logic          run, hit, hit_y;
  logic [NW-1:0] factor, cofactor;

  assign run   = (state == ST_RUN);
  assign sv_in = (phase == PH_Y) ? x_q : y_q;   // the factor updated last cycle

  candidate_sieve #(.FW(FW)) u_sieve (.en(sieve_en_q), .x(sv_in), .best(best), .sel(sieve_sel));

  decision_block #(.NW(NW), .FW(FW)) u_dec (
    .clk(clk), .rst_n(rst_n), .n_val(n_q),
    .x_valid(run && decision_en_q && (phase == PH_Y)), .x_cand(best),
    .y_valid(run && decision_en_q && (phase == PH_X)), .y_cand(best),
    .hit(hit), .hit_y(hit_y), .factor(factor), .cofactor(cofactor)
  );

  assign stop = run && (decision_en_q ? hit : exact);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_out <= '0;
      y_out <= '0;
    end else if (stop) begin
      if (!decision_en_q) begin
        x_out <= {{(NW-FW){1'b0}}, x_q};
        y_out <= {{(NW-FW){1'b0}}, y_q};
      end else if (hit_y) begin
        x_out <= cofactor;
        y_out <= factor;
      end else begin
        x_out <= factor;
        y_out <= cofactor;
      end
    end
  end

endmodule
