// Testbench of vcbm_factorizer at its default (64-bit) size: factors
// balanced semiprimes of 10 to 32 bits in the three modes of the paper's
// measurements (decision block with sieve, decision block alone, and X*Y = N
// only), each with several seeds. Every result must be a non-trivial factor
// pair of N. Also checks that the 8-sampling annealing schedule, every sieve
// choice, hits on both the X and the Y modulo operator, and upper factor bits
// held at 0 all occur.
module vcbm_factorizer_tb;
  import pf_pkg::*;
  localparam int NW = 64, FW = 32;
  localparam longint MAXS = 200000;       // samplings allowed per run
  logic clk = 0, rst_n = 0, start = 0, sieve_en = 1, decision_en = 1;
  logic [NW-1:0] n_in, x_out, y_out;
  logic [31:0] seed;
  logic busy, done, iter_end;
  logic [63:0] op_time;
  logic [FW-1:0] x_state, y_state;
  phase_e phase;
  logic [1:0] shift;
  sieve_sel_e sieve_sel;
  int checks = 0, failures = 0;
  int sel_seen [6];
  int iters = 0, hit_x = 0, hit_y = 0, exact_stops = 0, upper_ok = 0, upper_bad = 0;
  logic [FW-1:0] act_mask;

  vcbm_factorizer #(.NW(NW), .FW(FW)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n && busy && dut.run) begin
    sel_seen[int'(sieve_sel)]++;
    if (iter_end) iters++;
    if (((x_state | y_state) & ~act_mask) == '0) upper_ok++; else upper_bad++;
    if (dut.stop && dut.decision_en_q) begin
      if (dut.hit_y) hit_y++; else hit_x++;
    end
  end

  initial begin
    #2000000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic factor(input longint unsigned p, input longint unsigned q, input logic [31:0] sd,
                        input bit sv, input bit dec, output longint samples);
    longint unsigned nv;
    int nb;
    nv = p * q;
    nb = 0;
    for (int i = 0; i < 64; i++) if ((nv >> i) & 1) nb = i + 1;
    act_mask = '0;
    for (int k = 0; k < (nb + 1) / 2; k++) act_mask[k] = 1'b1;
    @(negedge clk);
    n_in = nv; seed = sd; sieve_en = sv; decision_en = dec; start = 1;
    @(negedge clk); start = 0;
    while (!done && !(busy && op_time > 64'(MAXS))) @(negedge clk);
    samples = longint'(op_time);
    checks++;
    if (!done) begin
      failures++;
      $display("FAIL N=%0d (%0d bits) not factored in %0d samplings", nv, nb, MAXS);
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end else if (x_out * y_out != nv || x_out < 2 || y_out < 2) begin
      failures++;
      $display("FAIL N=%0d: X=%0d Y=%0d", nv, x_out, y_out);
    end else begin
      if (!dec) exact_stops++;
    end
  endtask

  initial begin
    longint unsigned ps [7] = '{31, 61, 251, 1021, 4093, 16381, 65521};
    longint unsigned qs [7] = '{29, 59, 241, 1019, 4091, 16369, 65519};
    int tries;
    tries = 3;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int m = 0; m < 3; m++) begin
      for (int i = 0; i < 7; i++) begin
        longint tot;
        if (m == 2 && i > 3) continue;     // X*Y = N only: up to 20 bits
        tot = 0;
        for (int s = 0; s < tries; s++) begin
          longint smp;
          factor(ps[i], qs[i], 32'h1234_0000 + 32'(s * 7919 + i), m == 0, m != 2, smp);
          tot += smp;
        end
        $display("mode %s N=%0d*%0d: mean samplings %0d",
                 m == 0 ? "sieve+decision" : (m == 1 ? "decision" : "XY=N"), ps[i], qs[i], tot / tries);
      end
    end
    checks++;
    if (iters == 0 || hit_x == 0 || hit_y == 0 || exact_stops == 0 || upper_ok == 0 || upper_bad != 0) begin
      failures++;
      $display("FAIL coverage");
    end
    for (int k = 0; k < 6; k++) begin
      checks++;
      if (sel_seen[k] == 0) begin failures++; $display("FAIL sieve choice %0d never made", k); end
    end
    $display("iterations=%0d hits X=%0d Y=%0d exact=%0d sieve X/+2/-2/+4/-4/off=%0d/%0d/%0d/%0d/%0d/%0d",
             iters, hit_x, hit_y, exact_stops, sel_seen[0], sel_seen[1], sel_seen[2], sel_seen[3],
             sel_seen[4], sel_seen[5]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
