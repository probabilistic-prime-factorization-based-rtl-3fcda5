// Candidate sieve: picks the neighbour of a freshly sampled factor that is
// most worth a trial division.
//
// The Boltzmann machine output X tends to land near the true factor, so the
// sieve divides the four odd neighbours X, X+2, X-2 and X+4 by 3, 5 and 7 at
// the same time (twelve small modulo units) and passes on the first of them,
// in that order, that none of the three divides. If all four are divisible it
// passes X-4. With `en` low the sieve is bypassed and X itself is passed on.
// Each small modulo unit reduces its operand bit by bit from the MSB
// (r <- (2r + bit) mod m), a chain of compare-and-subtract steps on a 3-bit
// remainder. Purely combinational; the core registers `best` into the
// decision block.
// The candidate set, the order and the X-4 fallback follow the paper; the
// modulo circuit and the bypass input are this design's own.
module candidate_sieve
  import pf_pkg::*;
#(
  parameter int unsigned FW = 32
) (
  input  logic          en,
  input  logic [FW-1:0] x,
  output logic [FW-1:0] best,
  output sieve_sel_e    sel
);

  function automatic logic [2:0] mod_small(input logic [FW-1:0] val, input logic [3:0] m);
    logic [3:0] r;
    r = '0;
    for (int i = int'(FW) - 1; i >= 0; i--) begin
      r = {r[2:0], val[i]};
      if (r >= m) r = r - m;
    end
    return r[2:0];
  endfunction

  function automatic logic sieved(input logic [FW-1:0] val);
    return (mod_small(val, 4'd3) != 3'd0) && (mod_small(val, 4'd5) != 3'd0) &&
           (mod_small(val, 4'd7) != 3'd0);
  endfunction

  logic [FW-1:0] c_p0, c_p2, c_m2, c_p4, c_m4;
  logic          ok_p0, ok_p2, ok_m2, ok_p4;

  always_comb begin
    c_p0  = x;
    c_p2  = x + FW'(2);
    c_m2  = x - FW'(2);
    c_p4  = x + FW'(4);
    c_m4  = x - FW'(4);
    ok_p0 = sieved(c_p0);
    ok_p2 = sieved(c_p2);
    ok_m2 = sieved(c_m2);
    ok_p4 = sieved(c_p4);
    if (!en)        begin best = c_p0; sel = SEL_OFF; end
    else if (ok_p0) begin best = c_p0; sel = SEL_P0;  end
    else if (ok_p2) begin best = c_p2; sel = SEL_P2;  end
    else if (ok_m2) begin best = c_m2; sel = SEL_M2;  end
    else if (ok_p4) begin best = c_p4; sel = SEL_P4;  end
    else            begin best = c_m4; sel = SEL_M4;  end
  end

endmodule
