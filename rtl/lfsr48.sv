// 48-bit Fibonacci LFSR that delivers 16 fresh pseudo-random bits per clock.
//
// Each p-bit owns one of these. The register uses the maximal-length
// polynomial x^48 + x^47 + x^21 + x^20 + 1 and is stepped STEPS (16) times
// per clock by an unrolled loop, so `rnd` (the STEPS newest bits, newest in
// bit 0) is a new 16-bit word every cycle. `load` copies `seed` into the
// register (a zero seed, which would lock the LFSR, is replaced by 1);
// otherwise the register advances whenever `en` is high. `rnd` is a
// combinational view of the register, valid in the cycle after a load or step.
// The 48-bit length and 16 bits per clock follow the paper; the polynomial,
// the Fibonacci form and the zero-seed guard are this design's choices.
module lfsr48 #(
  parameter int unsigned STEPS = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              load,
  input  logic [47:0]       seed,
  input  logic              en,
  output logic [STEPS-1:0]  rnd
);

  logic [47:0] state_q, state_d;

  always_comb begin
    state_d = state_q;
    for (int i = 0; i < int'(STEPS); i++) begin
      state_d = {state_d[46:0], state_d[47] ^ state_d[46] ^ state_d[20] ^ state_d[19]};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      state_q <= 48'h1;
    else if (load)   state_q <= (seed == '0) ? 48'h1 : seed;
    else if (en)     state_q <= state_d;
  end

  assign rnd = state_q[STEPS-1:0];

endmodule
