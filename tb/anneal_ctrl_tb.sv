// Testbench of anneal_ctrl: after start, one INIT cycle, then the phase must
// alternate X, Y every clock and the shift run 0,0,1,1,2,2,3,3 and repeat,
// with iter_end on every 8th sampling; op_time must count samplings; stop
// must end the run without sampling and start must restart it.
module anneal_ctrl_tb;
  import pf_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, stop = 0;
  run_state_e state;
  logic init, update, iter_end;
  phase_e phase;
  logic [1:0] shift;
  logic [63:0] op_time;
  int checks = 0, failures = 0;

  anneal_ctrl dut (.*);

  always #5 clk = ~clk;

  task automatic expect_eq(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: %0d expected %0d", what, got, exp); end
  endtask

  task automatic run_samples(input int count);
    for (int t = 0; t < count; t++) begin
      expect_eq(update, 1, "update");
      expect_eq(phase, t % 2, "phase");
      expect_eq(shift, (t / 2) % 4, "shift");
      expect_eq(iter_end, (t % 8) == 7, "iter_end");
      expect_eq(op_time, t, "op_time");
      @(negedge clk);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    expect_eq(state, ST_IDLE, "idle");
    expect_eq(update, 0, "no update when idle");
    start = 1; @(negedge clk); start = 0;
    expect_eq(init, 1, "init");
    expect_eq(update, 0, "no update in init");
    @(negedge clk);
    run_samples(37);
    stop = 1;
    #1 expect_eq(update, 0, "stop blocks update");
    @(negedge clk); stop = 0;
    expect_eq(state, ST_DONE, "done");
    expect_eq(op_time, 37, "op_time held");
    repeat (3) @(negedge clk);
    expect_eq(op_time, 37, "op_time still held");
    start = 1; @(negedge clk); start = 0;
    expect_eq(init, 1, "init again");
    @(negedge clk);
    run_samples(20);
    start = 1; @(negedge clk); start = 0;   // restart while running
    expect_eq(init, 1, "restart");
    @(negedge clk);
    run_samples(9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
