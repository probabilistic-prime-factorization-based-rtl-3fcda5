// One probabilistic bit (p-bit).
//
// The 8-bit input I_k from the energy calculator goes through the sigmoid
// table; the 16-bit result is compared with the 16-bit word of this p-bit's
// own LFSR. The sample `s` is 1 when the sigmoid output is higher than the
// random word, so P(s = 1) is about 1 / (1 + exp(-I_k/16)). `s` is
// combinational; the factorization core registers it into X or Y. The LFSR
// is loaded with `seed` on `load` and steps every cycle in which `en` is
// high, giving a fresh random word to each sampling. This structure (LUT
// sigmoid, 48-bit LFSR, 16-bit comparator, 1 on "higher") is the paper's.
module pbit (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        load,
  input  logic [47:0] seed,
  input  logic        en,
  input  logic [7:0]  ik,
  output logic        s
);

  logic [15:0] prob;
  logic [15:0] rnd;

  sigmoid_lut u_lut (.ik(ik), .prob(prob));

  lfsr48 #(.STEPS(16)) u_lfsr (
    .clk(clk), .rst_n(rst_n), .load(load), .seed(seed), .en(en), .rnd(rnd)
  );

  assign s = (prob > rnd);

endmodule
