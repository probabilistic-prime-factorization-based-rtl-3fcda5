// Workload testbench: the multi-chip experiment. Four copies of the machine
// (default size) get the same semiprime and different seeds and run without
// any connection between them; with k chips the problem is solved when the
// first of chips 0 .. k-1 finishes. Over TRIALS problems the testbench
// computes the mean number of samplings for 1 to 4 chips and the speed-up
// over one chip. The published measurements show about 2x, 3x and 4x; the
// check asks for at least 1.4x with two chips and 2.4x with four, and that
// every chip's result is a non-trivial factor pair.
module multichip_tb;
  import pf_pkg::*;
  localparam int NW = 64, FW = 32, CHIPS = 4, TRIALS = 150;
  logic clk = 0, rst_n = 0, start = 0;
  logic [NW-1:0] n_in;
  logic [NW-1:0] x_out [CHIPS], y_out [CHIPS];
  logic [31:0] seed [CHIPS];
  logic busy [CHIPS], done [CHIPS];
  logic [63:0] op_time [CHIPS];
  int checks = 0, failures = 0;

  for (genvar c = 0; c < CHIPS; c++) begin : g_chip
    logic [FW-1:0] xs, ys;
    phase_e ph;
    logic [1:0] sh;
    logic ie;
    sieve_sel_e ss;
    vcbm_factorizer #(.NW(NW), .FW(FW)) u_chip (
      .clk(clk), .rst_n(rst_n), .start(start), .n_in(n_in), .seed(seed[c]), .sieve_en(1'b1),
      .decision_en(1'b1), .busy(busy[c]), .done(done[c]), .x_out(x_out[c]), .y_out(y_out[c]),
      .op_time(op_time[c]), .x_state(xs), .y_state(ys), .phase(ph), .shift(sh), .iter_end(ie),
      .sieve_sel(ss)
    );
  end

  always #5 clk = ~clk;

  initial begin
    #2000000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned p, q, nv;
    real sum [CHIPS];
    p = 64'd65521; q = 64'd65519;      // 32-bit semiprime
    nv = p * q;
    foreach (sum[k]) sum[k] = 0.0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < TRIALS; t++) begin
      longint best;
      bit all_done;
      @(negedge clk);
      n_in = nv;
      for (int c = 0; c < CHIPS; c++) seed[c] = 32'(t * CHIPS + c + 1) * 32'h2545_F491;
      start = 1;
      @(negedge clk); start = 0;
      do begin
        @(negedge clk);
        all_done = 1;
        for (int c = 0; c < CHIPS; c++) if (!done[c]) all_done = 0;
      end while (!all_done);
      best = longint'(op_time[0]);
      for (int c = 0; c < CHIPS; c++) begin
        checks++;
        if (x_out[c] * y_out[c] != nv || x_out[c] < 2 || y_out[c] < 2) begin
          failures++;
          $display("FAIL chip %0d: X=%0d Y=%0d", c, x_out[c], y_out[c]);
        end
        if (longint'(op_time[c]) < best) best = longint'(op_time[c]);
        sum[c] += real'(best);         // chips 0 .. c together
      end
    end
    for (int k = 0; k < CHIPS; k++)
      $display("%0d chip(s): mean %0.1f samplings, speed-up %0.2f", k + 1, sum[k] / TRIALS,
               sum[0] / sum[k]);
    checks++;
    if (sum[0] / sum[1] < 1.4 || sum[0] / sum[3] < 2.4) begin
      failures++;
      $display("FAIL multi-chip speed-up too small");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
