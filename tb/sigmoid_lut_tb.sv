// Testbench of sigmoid_lut: all 256 inputs against 65536 / (1 + exp(-I/16))
// (within one LSB), plus monotonicity and the mid-point value 32768.
module sigmoid_lut_tb;
  logic [7:0]  ik;
  logic [15:0] prob;
  int checks = 0, failures = 0;

  sigmoid_lut dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] prev;
    prev = 0;
    for (int i = -128; i < 128; i++) begin
      real e;
      ik = 8'(i);
      #1;
      e = 65536.0 / (1.0 + $exp(-real'(i) / 16.0));
      if (e > 65535.0) e = 65535.0;
      checks++;
      if ((real'(prob) - e) > 1.0 || (e - real'(prob)) > 1.0) begin
        failures++;
        $display("FAIL I=%0d prob=%0d expected %f", i, prob, e);
      end
      checks++;
      if (prob < prev) begin
        failures++;
        $display("FAIL not monotonic at %0d", i);
      end
      prev = prob;
    end
    ik = 8'd0; #1;
    checks++;
    if (prob != 16'd32768) begin failures++; $display("FAIL mid %0d", prob); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
