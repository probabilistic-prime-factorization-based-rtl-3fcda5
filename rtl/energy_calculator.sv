// Energy calculator of the virtually connected Boltzmann machine (VCBM).
//
// With the cost function E = E0 (XY - N)^2, E0 = 2^(3-2n) and n the bit count
// of N, the input of the p-bit that samples bit k of the factor U being
// updated (V is the other factor) is
//     I_k = 2^s * ( 2^(3+k-2n) (N - UV) V  +/-  2^(1+2k-2n) V^2 ),
// "+" when U_k is 1 and "-" when it is 0, where s (0..3) is the annealing
// left shift of E. The block computes the two products (N-UV)V and V^2 once,
// exactly and at full width, and forms every I_k from them with shifts only:
// in units of 1/16 (4 fraction bits)
//     16 I_k = ( 4 (N-UV)V  +/-  2^k V^2 ) * 2^(5+k+s-2n),
// an arithmetic right shift by 2n-5-k-s for all supported sizes. The result
// is saturated to the signed 8-bit s3.4 range (-8 .. +7.9375).
// p-bit j samples factor bit k = j+1 (bit 0 of a prime is 1 and is not
// sampled). `exact` is high when U*V equals N. Purely combinational: in the
// paper the whole calculation and the p-bit update take one clock.
// Formula (8), the shift-only scaling, the unquantized products and the
// s3.4 output follow the paper; rounding by arithmetic shift (towards minus
// infinity) and saturation at the range ends are this design's choices.
module energy_calculator #(
  parameter int unsigned NW  = 64,
  parameter int unsigned FW  = 32,
  parameter int unsigned NPB = FW - 1,
  parameter int unsigned NBW = $clog2(NW + 1)
) (
  input  logic [NW-1:0]  n_val,   // semiprime N
  input  logic [NBW-1:0] n_bits,  // n, the number of bits of N
  input  logic [1:0]     shift,   // annealing shift s
  input  logic [FW-1:0]  u,       // factor being updated
  input  logic [FW-1:0]  v,       // the other factor
  output logic [7:0]     ik [NPB],
  output logic           exact
);

  localparam int unsigned RW = NW + 2;        // N - UV, signed
  localparam int unsigned CW = RW + FW + 3;   // 4 (N-UV)V +/- 2^k V^2, signed

  logic signed [RW-1:0]     resid;
  logic signed [CW-1:0]     a4;               // 4 (N - UV) V
  logic [2*FW-1:0]          vsq;              // V^2

  always_comb begin
    logic [2*FW-1:0] uv;
    uv    = {{FW{1'b0}}, u} * {{FW{1'b0}}, v};
    resid = $signed({2'b00, n_val}) - $signed({{(RW-2*FW){1'b0}}, uv});
    a4    = ($signed({{(CW-RW){resid[RW-1]}}, resid}) * $signed({{(CW-FW){1'b0}}, v})) <<< 2;
    vsq   = {{FW{1'b0}}, v} * {{FW{1'b0}}, v};
    exact = (resid == '0);
  end

  always_comb begin
    for (int j = 0; j < int'(NPB); j++) begin
      logic signed [CW-1:0] b_k, c_k, t_k;
      int                   rsh;
      b_k = $signed({{(CW-2*FW){1'b0}}, vsq}) <<< (j + 1);
      c_k = u[j+1] ? (a4 + b_k) : (a4 - b_k);
      rsh = 2 * int'(n_bits) - 5 - (j + 1) - int'(shift);
      if (rsh >= 0) t_k = c_k >>> rsh;
      else          t_k = c_k <<< (-rsh);
      if (t_k > 127)       ik[j] = 8'h7f;
      else if (t_k < -128) ik[j] = 8'h80;
      else                 ik[j] = t_k[7:0];
    end
  end

endmodule
