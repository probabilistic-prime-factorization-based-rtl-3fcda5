// Decision block: ends the factorization when N mod X or N mod Y is zero.
//
// Two modulo operators run side by side, one on the candidates derived from
// X and one on those from Y, each two clocks deep. A divisor counts only if
// 1 < D < N, so the trivial divisors 1 and N (and a wrapped-around candidate)
// never stop the machine. `hit` is high for one cycle when a result with a
// zero remainder leaves either pipeline; `factor` is that divisor and
// `cofactor` N / factor. If both hit in the same cycle the X side wins.
// `hit_y` tells which side hit. Two modulo operators, N mod X and N mod Y,
// are the paper's; the divisor range check is this design's own.
module decision_block #(
  parameter int unsigned NW = 64,
  parameter int unsigned FW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [NW-1:0] n_val,
  input  logic          x_valid,
  input  logic [FW-1:0] x_cand,
  input  logic          y_valid,
  input  logic [FW-1:0] y_cand,
  output logic          hit,
  output logic          hit_y,
  output logic [NW-1:0] factor,
  output logic [NW-1:0] cofactor
);

  logic          xv, yv;
  logic [FW-1:0] xr, yr, xd, yd;
  logic [NW-1:0] xq, yq;
  logic          x_ok, y_ok;

  function automatic logic divisor_ok(input logic [FW-1:0] dv, input logic [NW-1:0] nv);
    return (dv > FW'(1)) && ({{(NW-FW){1'b0}}, dv} < nv);
  endfunction

  modulo_operator #(.NW(NW), .DW(FW)) u_mod_x (
    .clk(clk), .rst_n(rst_n), .in_valid(x_valid && divisor_ok(x_cand, n_val)),
    .n_val(n_val), .d(x_cand), .out_valid(xv), .rem(xr), .quo(xq), .d_out(xd)
  );

  modulo_operator #(.NW(NW), .DW(FW)) u_mod_y (
    .clk(clk), .rst_n(rst_n), .in_valid(y_valid && divisor_ok(y_cand, n_val)),
    .n_val(n_val), .d(y_cand), .out_valid(yv), .rem(yr), .quo(yq), .d_out(yd)
  );

  always_comb begin
    x_ok     = xv && (xr == '0);
    y_ok     = yv && (yr == '0);
    hit      = x_ok || y_ok;
    hit_y    = !x_ok && y_ok;
    factor   = x_ok ? {{(NW-FW){1'b0}}, xd} : {{(NW-FW){1'b0}}, yd};
    cofactor = x_ok ? xq : yq;
  end

endmodule
