// Testbench of lfsr48: checks every output word against a bit-serial model
// of the x^48 + x^47 + x^21 + x^20 + 1 register stepped 16 times per clock,
// the hold when `en` is low, and the zero-seed guard.
module lfsr48_tb;
  logic clk = 0, rst_n = 0, load = 0, en = 0;
  logic [47:0] seed;
  logic [15:0] rnd;
  int checks = 0, failures = 0;
  logic [47:0] ref_s;

  lfsr48 #(.STEPS(16)) dut (.*);

  always #5 clk = ~clk;

  task automatic ref_step();
    for (int i = 0; i < 16; i++) begin
      logic fb;
      fb = ref_s[47] ^ ref_s[46] ^ ref_s[20] ^ ref_s[19];
      ref_s = {ref_s[46:0], fb};
    end
  endtask

  task automatic check(input string what);
    checks++;
    if (rnd !== ref_s[15:0]) begin
      failures++;
      $display("FAIL %s: rnd=%h expected %h", what, rnd, ref_s[15:0]);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    seed = 48'h1234_5678_9ABC;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); load = 1;
    @(negedge clk); load = 0; en = 1;
    ref_s = seed;
    check("after load");
    for (int c = 0; c < 300; c++) begin
      @(negedge clk);
      ref_step();
      check("step");
    end
    en = 0;
    repeat (5) begin @(negedge clk); check("hold"); end
    seed = '0; load = 1;
    @(negedge clk); load = 0;
    ref_s = 48'h1;
    check("zero seed");
    en = 1;
    for (int c = 0; c < 50; c++) begin
      @(negedge clk);
      ref_step();
      check("step from 1");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
