// Testbench of seed_gen: for a set of host seeds, every derived LFSR seed
// must be non-zero, all must differ, and each must equal the documented
// formula {k+1, seed ^ (0x9E3779B9 * (k+1))}.
module seed_gen_tb;
  localparam int NPB = 31;
  logic [31:0] seed;
  logic [47:0] lfsr_seed [NPB];
  int checks = 0, failures = 0;

  seed_gen #(.NPB(NPB)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 20; t++) begin
      longint unsigned m;
      seed = (t == 0) ? 32'd0 : $urandom;
      #1;
      for (int k = 0; k < NPB; k++) begin
        m = (64'h9E3779B9 * 64'(k + 1)) & 64'hFFFF_FFFF;
        checks++;
        if (lfsr_seed[k] !== {16'(k + 1), seed ^ m[31:0]}) begin
          failures++;
          $display("FAIL seed %h k %0d: %h", seed, k, lfsr_seed[k]);
        end
        checks++;
        if (lfsr_seed[k] == '0) failures++;
        for (int j = 0; j < k; j++) begin
          checks++;
          if (lfsr_seed[j] == lfsr_seed[k]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
