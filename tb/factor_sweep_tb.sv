// Workload testbench: the sampling-count sweeps of the paper's measurements,
// on the default 64-bit machine. For every even bit count n the semiprime is
// the product of the largest primes below 13/16 and 11/16 of 2^(n/2), two
// primes without special bit patterns (N then has exactly n bits); it is
// factored TRIALS
// times with different seeds, and the median number of samplings (the
// "samples to 50% accuracy" of the measurements) is printed. Modes: sieve
// and decision block for n = 10 .. 44, decision block alone for n = 10 .. 32,
// X*Y = N only for n = 10 .. 20. Each result must be a non-trivial factor
// pair. For the main mode at n = 20 .. 32 the median must lie within a factor
// of 8 of the reference counts below, read off the published FPGA curve
// (Extended Data Fig. 4b, decision and sieve): 28, 57, 110, 230, 440, 700,
// 1700 samplings.
module factor_sweep_tb;
  import pf_pkg::*;
  localparam int NW = 64, FW = 32, TRIALS = 15;
  localparam longint MAXS = 20000000;
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

  vcbm_factorizer #(.NW(NW), .FW(FW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit is_prime(input longint unsigned v);
    if (v < 2) return 0;
    for (longint unsigned d = 2; d * d <= v; d++) if (v % d == 0) return 0;
    return 1;
  endfunction

  function automatic longint unsigned prime_below(input longint unsigned lim);
    for (longint unsigned v = lim - 1; v > 2; v--) if (is_prime(v)) return v;
    return 2;
  endfunction

  task automatic factor(input longint unsigned nv, input logic [31:0] sd, input bit sv,
                        input bit dec, output longint samples);
    @(negedge clk);
    n_in = nv; seed = sd; sieve_en = sv; decision_en = dec; start = 1;
    @(negedge clk); start = 0;
    while (!done && !(busy && op_time > 64'(MAXS))) @(negedge clk);
    samples = longint'(op_time);
    checks++;
    if (!done || x_out * y_out != nv || x_out < 2 || y_out < 2) begin
      failures++;
      $display("FAIL N=%0d: done=%0b X=%0d Y=%0d", nv, done, x_out, y_out);
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  endtask

  initial begin
    longint ref_cnt [11] = '{28, 57, 110, 230, 440, 700, 1700, 0, 0, 0, 0};
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int m = 0; m < 3; m++) begin
      int nmax;
      nmax = (m == 0) ? 44 : ((m == 1) ? 32 : 20);
      for (int n = 10; n <= nmax; n += 2) begin
        longint unsigned p, q;
        longint smp [TRIALS];
        longint med;
        p = prime_below((64'd13 << (n / 2)) / 16);
        q = prime_below((64'd11 << (n / 2)) / 16);
        for (int t = 0; t < TRIALS; t++)
          factor(p * q, 32'(n * 1000 + t + m * 100) * 32'h9E37_79B1, m == 0, m != 2, smp[t]);
        smp.sort();
        med = smp[TRIALS / 2];
        $display("%-15s n=%0d N=%0d*%0d: median %0d samplings (min %0d, max %0d)",
                 m == 0 ? "sieve+decision" : (m == 1 ? "decision" : "XY=N only"),
                 n, p, q, med, smp[0], smp[TRIALS - 1]);
        if (m == 0 && n >= 20 && n <= 32) begin
          longint r;
          r = ref_cnt[(n - 20) / 2];
          checks++;
          if (med * 8 < r || med > r * 8) begin
            failures++;
            $display("FAIL n=%0d: median %0d too far from the reference %0d", n, med, r);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
