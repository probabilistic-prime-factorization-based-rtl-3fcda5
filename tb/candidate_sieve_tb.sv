// Testbench of candidate_sieve: random and constructed odd inputs against a
// model using the % operator (order X, X+2, X-2, X+4, fallback X-4), every
// selection kind covered, and the bypass.
module candidate_sieve_tb;
  import pf_pkg::*;
  localparam int FW = 32;
  logic          en;
  logic [FW-1:0] x, best;
  sieve_sel_e    sel;
  int checks = 0, failures = 0;
  int seen [6];

  candidate_sieve #(.FW(FW)) dut (.*);

  function automatic bit ok(input logic [FW-1:0] c);
    return (c % 3 != 0) && (c % 5 != 0) && (c % 7 != 0);
  endfunction

  task automatic check(input logic [FW-1:0] xv, input logic e);
    logic [FW-1:0] exp_b;
    sieve_sel_e    exp_s;
    x = xv; en = e;
    #1;
    if (!e)                 begin exp_b = xv;           exp_s = SEL_OFF; end
    else if (ok(xv))        begin exp_b = xv;           exp_s = SEL_P0;  end
    else if (ok(xv + 2))    begin exp_b = xv + 2;       exp_s = SEL_P2;  end
    else if (ok(xv - 2))    begin exp_b = xv - 2;       exp_s = SEL_M2;  end
    else if (ok(xv + 4))    begin exp_b = xv + 4;       exp_s = SEL_P4;  end
    else                    begin exp_b = xv - 4;       exp_s = SEL_M4;  end
    checks++;
    if (best !== exp_b || sel !== exp_s) begin
      failures++;
      $display("FAIL x=%0d en=%0b: best=%0d sel=%0d expected %0d/%0d", xv, e, best, sel, exp_b, exp_s);
    end
    seen[int'(sel)]++;
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) check($urandom | 1, 1'b1);
    for (int t = 11; t < 3000; t += 2) check(FW'(t), 1'b1);
    for (int t = 0; t < 50; t++) check($urandom | 1, 1'b0);
    for (int k = 0; k < 6; k++) begin
      checks++;
      if (seen[k] == 0) begin failures++; $display("FAIL selection %0d never seen", k); end
    end
    $display("selections X=%0d X+2=%0d X-2=%0d X+4=%0d X-4=%0d off=%0d",
             seen[0], seen[1], seen[2], seen[3], seen[4], seen[5]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
