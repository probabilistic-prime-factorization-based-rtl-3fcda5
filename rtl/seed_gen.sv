// Derives one 48-bit LFSR seed per p-bit from the single 32-bit seed the host
// writes.
//
// Seed k is {16-bit k+1, seed XOR (0x9E3779B9 * (k+1))}: the lower 32 bits
// scramble the host seed differently for every p-bit (and are the first
// random word the LFSR shows), and the upper 16 bits (k+1, never 0) make
// every seed non-zero and all seeds distinct. Purely
// combinational. That the machine makes its LFSR seeds internally from one
// 32-bit input is from the paper; the mixing formula is this design's own.
module seed_gen #(
  parameter int unsigned NPB = 31
) (
  input  logic [31:0] seed,
  output logic [47:0] lfsr_seed [NPB]
);

  always_comb begin
    for (int k = 0; k < int'(NPB); k++) begin
      lfsr_seed[k] = {16'(k + 1), seed ^ (32'h9E37_79B9 * 32'(k + 1))};
    end
  end

endmodule
