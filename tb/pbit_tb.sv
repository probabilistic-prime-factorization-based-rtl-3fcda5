// Testbench of pbit: each cycle's sample must equal (sigmoid(I) > random
// word) computed from independent models of the LFSR and the sigmoid, and
// over 4000 samplings the fraction of ones must be within 0.03 of
// 1 / (1 + exp(-I/16)) for a range of inputs.
module pbit_tb;
  logic clk = 0, rst_n = 0, load = 0, en = 0;
  logic [47:0] seed;
  logic [7:0]  ik;
  logic        s;
  int checks = 0, failures = 0;
  logic [47:0] ref_s;

  pbit dut (.*);

  always #5 clk = ~clk;

  function automatic int sig16(input logic [7:0] v);
    real e;
    e = 65536.0 / (1.0 + $exp(-real'($signed(v)) / 16.0));
    if (e > 65535.0) e = 65535.0;
    return $rtoi(e);
  endfunction

  task automatic ref_step();
    for (int i = 0; i < 16; i++) ref_s = {ref_s[46:0], ref_s[47] ^ ref_s[46] ^ ref_s[20] ^ ref_s[19]};
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ins [7] = '{-100, -40, -16, 0, 16, 40, 100};
    seed = 48'hA5A5_0123_4567;
    ik = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); load = 1;
    @(negedge clk); load = 0; en = 1;
    ref_s = seed;
    foreach (ins[t]) begin
      int ones, mism;
      real p, f;
      ones = 0; mism = 0;
      ik = 8'(ins[t]);
      for (int c = 0; c < 4000; c++) begin
        #1;
        if (s !== (sig16(ik) > int'(ref_s[15:0]))) mism++;
        if (s) ones++;
        @(negedge clk);
        ref_step();
      end
      checks++;
      if (mism != 0) begin failures++; $display("FAIL I=%0d: %0d mismatching samples", ins[t], mism); end
      p = 1.0 / (1.0 + $exp(-real'(ins[t]) / 16.0));
      f = real'(ones) / 4000.0;
      checks++;
      if (f - p > 0.03 || p - f > 0.03) begin
        failures++;
        $display("FAIL I=%0d: fraction %f expected %f", ins[t], f, p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
