// End-to-end testbench of pfm_top at its default size (64-bit N, 31 p-bits).
// Like the host, it writes N and the seed over AXI4-Lite, starts the machine,
// polls the status register and takes the factors from the result ports.
// Semiprimes of 12 to 36 bits are factored in the main mode (sieve and
// decision block) and in the two reference modes (decision block alone,
// X*Y = N only); one run is restarted while busy. Every result must be a
// non-trivial factor pair, and the testbench counts that each mechanism
// happened: annealing restarts after 8 samplings, every shift value, every
// candidate-sieve choice, stops by the X and by the Y modulo operator and by
// X*Y = N, the mode switches and the restart.
module pfm_top_tb;
  logic clk = 0, rst_n = 0;
  logic [4:0] s_awaddr = 0, s_araddr = 0;
  logic s_awvalid = 0, s_wvalid = 0, s_bready = 0, s_arvalid = 0, s_rready = 0;
  logic [31:0] s_wdata = 0, s_rdata;
  logic [3:0] s_wstrb = 0;
  logic s_awready, s_wready, s_bvalid, s_arready, s_rvalid;
  logic [1:0] s_bresp, s_rresp;
  logic done, busy, phase, iter_end;
  logic [63:0] x_out, y_out, op_time;
  logic [31:0] x_state, y_state;
  logic [1:0] shift;
  logic [2:0] sieve_sel;
  int checks = 0, failures = 0;
  int sel_seen [6], shift_seen [4];
  int iters = 0, stop_x = 0, stop_y = 0, stop_exact = 0, restarts = 0, mode_switches = 0;

  pfm_top dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n && dut.u_core.run) begin
    sel_seen[sieve_sel]++;
    shift_seen[shift]++;
    if (iter_end) iters++;
    if (dut.u_core.stop) begin
      if (!dut.u_core.decision_en_q) stop_exact++;
      else if (dut.u_core.hit_y) stop_y++;
      else stop_x++;
    end
  end

  initial begin
    #1000000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic axi_write(input logic [4:0] a, input logic [31:0] d);
    @(negedge clk);
    s_awaddr = a; s_awvalid = 1; s_wdata = d; s_wstrb = 4'hF; s_wvalid = 1; s_bready = 1;
    do @(posedge clk); while (!(s_awready && s_wready));
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0;
    while (!s_bvalid) @(negedge clk);
    @(negedge clk); s_bready = 0;
  endtask

  task automatic axi_read(input logic [4:0] a, output logic [31:0] d);
    @(negedge clk);
    s_araddr = a; s_arvalid = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk); s_arvalid = 0; s_rready = 1;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
    @(negedge clk); s_rready = 0;
  endtask

  function automatic bit is_prime(input longint unsigned v);
    if (v < 2) return 0;
    for (longint unsigned d = 2; d * d <= v; d++) if (v % d == 0) return 0;
    return 1;
  endfunction

  // largest prime below `lim`
  function automatic longint unsigned prime_below(input longint unsigned lim);
    for (longint unsigned v = lim - 1; v > 2; v--) if (is_prime(v)) return v;
    return 2;
  endfunction

  bit last_sieve = 1, last_dec = 1;

  task automatic run_n(input longint unsigned p, input longint unsigned q, input logic [31:0] sd,
                       input bit sv, input bit dec, input bit restart_midway);
    logic [31:0] st;
    longint unsigned nv;
    int polls;
    nv = p * q;
    axi_write(5'h00, nv[31:0]);
    axi_write(5'h04, nv[63:32]);
    axi_write(5'h08, sd);
    if (sv != last_sieve || dec != last_dec) mode_switches++;
    last_sieve = sv; last_dec = dec;
    axi_write(5'h0C, {29'd0, dec, sv, 1'b1});
    if (restart_midway) begin
      repeat (5) @(negedge clk);
      checks++;
      if (!busy) begin failures++; $display("FAIL not busy before restart"); end
      axi_write(5'h08, sd ^ 32'h5555);
      axi_write(5'h0C, {29'd0, dec, sv, 1'b1});
      restarts++;
    end
    polls = 0;
    do begin
      axi_read(5'h10, st);
      polls++;
    end while (!st[0] && polls < 50000);
    checks++;
    if (!st[0] || st[1]) begin
      failures++;
      $display("FAIL N=%0d: status %h after %0d polls", nv, st, polls);
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end else if (x_out * y_out != nv || x_out < 2 || y_out < 2) begin
      failures++;
      $display("FAIL N=%0d: X=%0d Y=%0d", nv, x_out, y_out);
    end else
      $display("N=%0d (%0d*%0d) sieve=%0b decision=%0b: X=%0d Y=%0d after %0d samplings",
               nv, p, q, sv, dec, x_out, y_out, op_time);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int h = 6; h <= 18; h += 2) begin
      longint unsigned p, q;
      p = prime_below(64'd1 << h);
      q = prime_below(p);
      for (int s = 0; s < 3; s++) run_n(p, q, 32'(h * 16 + s) * 32'h2545_F491, 1, 1, 0);
      if (h <= 14) run_n(p, q, 32'hB000 + 32'(h), 0, 1, 0);
      if (h <= 8)  run_n(p, q, 32'hC000 + 32'(h), 0, 0, 0);
    end
    run_n(prime_below(64'd1 << 12), prime_below(prime_below(64'd1 << 12)), 32'hD00D, 1, 1, 1);
    checks++;
    if (iters == 0) begin failures++; $display("FAIL no annealing restart"); end
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (shift_seen[k] == 0) begin failures++; $display("FAIL shift %0d never used", k); end
    end
    for (int k = 0; k < 6; k++) begin
      checks++;
      if (sel_seen[k] == 0) begin failures++; $display("FAIL sieve choice %0d never made", k); end
    end
    checks++;
    if (stop_x == 0 || stop_y == 0 || stop_exact == 0 || restarts == 0 || mode_switches == 0) begin
      failures++;
      $display("FAIL a stop kind, the restart or a mode switch never happened");
    end
    $display("annealing iterations=%0d stops X=%0d Y=%0d XY=N=%0d restarts=%0d mode switches=%0d",
             iters, stop_x, stop_y, stop_exact, restarts, mode_switches);
    $display("sieve choices X/+2/-2/+4/-4/off=%0d/%0d/%0d/%0d/%0d/%0d", sel_seen[0], sel_seen[1],
             sel_seen[2], sel_seen[3], sel_seen[4], sel_seen[5]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
