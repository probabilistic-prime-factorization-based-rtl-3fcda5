// Sigmoid activation table of a p-bit.
//
// Maps the 8-bit signed s3.4 input I (value I/16, range -8 .. +7.9375) to a
// 16-bit probability P = min(65535, floor(65536 / (1 + exp(-I/16)))). The
// 256-entry table is computed at elaboration by a constant function, so no
// data file is needed; in hardware it is a small ROM. Combinational.
// The 8-bit s3.4 input and the 16-bit output are from the paper; the
// rounding (truncation, clipped at 65535) is this design's choice.
module sigmoid_lut (
  input  logic [7:0]  ik,
  output logic [15:0] prob
);

  typedef logic [15:0] lut_t [256];

  function automatic lut_t gen_lut();
    lut_t l;
    for (int i = 0; i < 256; i++) begin
      real x, s;
      x = real'($signed(8'(i))) / 16.0;
      s = 65536.0 / (1.0 + $exp(-x));
      if (s > 65535.0) s = 65535.0;
      l[i] = 16'($rtoi(s));
    end
    return l;
  endfunction

  localparam lut_t LUT = gen_lut();

  assign prob = LUT[ik];

endmodule
