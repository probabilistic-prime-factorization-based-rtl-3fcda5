// Modulo operator of the decision block: N mod D, pipelined over two cycles.
//
// A restoring divider of the NW-bit dividend N by the DW-bit divisor D. The
// first stage produces the upper NW/2 quotient bits and registers the partial
// remainder, the second stage the lower NW/2 bits, so a result (`rem`, the
// quotient `quo` and the divisor `d_out` it belongs to) leaves `out_valid`
// exactly two clocks after `in_valid`. A new operand may enter every cycle.
// That the operator is split into two pipelined cycles to shorten the
// critical path is from the paper; the restoring algorithm and the split
// point are this design's choices. D = 0 yields a meaningless result; the
// decision block never accepts it.
module modulo_operator #(
  parameter int unsigned NW = 64,
  parameter int unsigned DW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [NW-1:0] n_val,
  input  logic [DW-1:0] d,
  output logic          out_valid,
  output logic [DW-1:0] rem,
  output logic [NW-1:0] quo,
  output logic [DW-1:0] d_out
);

  localparam int unsigned H1 = NW / 2;       // quotient bits of stage 1
  localparam int unsigned H2 = NW - H1;      // quotient bits of stage 2

  // Shift `cnt` dividend bits (MSB first) through the partial remainder.
  function automatic logic [DW:0] div_steps(input logic [DW:0] r_in, input logic [NW-1:0] bits,
                                            input int unsigned first, input int unsigned cnt,
                                            input logic [DW-1:0] dv, output logic [NW-1:0] q);
    logic [DW:0] r;
    r = r_in;
    q = '0;
    for (int unsigned i = 0; i < cnt; i++) begin
      r = {r[DW-1:0], bits[first-i]};
      if (r >= {1'b0, dv}) begin
        r = r - {1'b0, dv};
        q[first-i] = 1'b1;
      end
    end
    return r;
  endfunction

  logic          v1_q;
  logic [DW:0]   r1_q, r1_d, r2_d;
  logic [NW-1:0] q1_q, q1_d, q2_d, n1_q;
  logic [DW-1:0] d1_q;

  always_comb begin
    r1_d = div_steps('0, n_val, NW - 1, H1, d, q1_d);
    r2_d = div_steps(r1_q, n1_q, H2 - 1, H2, d1_q, q2_d);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1_q      <= 1'b0;
      r1_q      <= '0;
      q1_q      <= '0;
      n1_q      <= '0;
      d1_q      <= '0;
      out_valid <= 1'b0;
      rem       <= '0;
      quo       <= '0;
      d_out     <= '0;
    end else begin
      v1_q      <= in_valid;
      r1_q      <= r1_d;
      q1_q      <= q1_d;
      n1_q      <= n_val;
      d1_q      <= d;
      out_valid <= v1_q;
      rem       <= r2_d[DW-1:0];   // the final remainder is below D, bit DW is 0
      quo       <= q1_q | q2_d;
      d_out     <= d1_q;
    end
  end

endmodule
