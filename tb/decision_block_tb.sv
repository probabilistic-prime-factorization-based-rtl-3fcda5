// Testbench of decision_block: streams of X and Y candidates for known
// semiprimes; a hit must appear exactly two clocks after a true divisor
// (and only then), name the right side, and carry the divisor and N / divisor.
// The trivial divisors 1 and N and a zero divisor must never hit.
module decision_block_tb;
  localparam int NW = 64, FW = 32;
  logic clk = 0, rst_n = 0;
  logic [NW-1:0] n_val, factor, cofactor;
  logic x_valid = 0, y_valid = 0, hit, hit_y;
  logic [FW-1:0] x_cand, y_cand;
  int checks = 0, failures = 0, hits_x = 0, hits_y = 0;
  typedef struct { bit xh; bit yh; logic [FW-1:0] xd; logic [FW-1:0] yd; } exp_t;
  exp_t hist [$];

  decision_block #(.NW(NW), .FW(FW)) dut (.*);

  always #5 clk = ~clk;

  function automatic bit divides(input logic [NW-1:0] nv, input logic [FW-1:0] dv);
    return dv > 1 && NW'(dv) < nv && (nv % NW'(dv)) == 0;
  endfunction

  initial begin
    #400000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [FW-1:0] p, q;
    p = 32'd4294967291; q = 32'd4294967279;        // two 32-bit primes
    n_val = NW'(p) * NW'(q);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      if (hist.size() == 2) begin
        exp_t e;
        bit   eh;
        e  = hist.pop_front();
        eh = e.xh || e.yh;
        checks++;
        if (hit !== eh || (eh && hit_y !== !e.xh)) begin
          failures++;
          $display("FAIL cycle %0d: hit=%0b hit_y=%0b expected %0b/%0b", c, hit, hit_y, e.xh, e.yh);
        end
        if (eh) begin
          logic [FW-1:0] dv;
          dv = e.xh ? e.xd : e.yd;
          checks++;
          if (factor !== NW'(dv) || cofactor !== n_val / NW'(dv)) begin
            failures++;
            $display("FAIL factor %0d cofactor %0d", factor, cofactor);
          end
          if (e.xh) hits_x++; else hits_y++;
        end
      end
      if (c == 1500) begin   // small problem, includes the trivial divisor N itself
        p = 32'd1009; q = 32'd1013; n_val = NW'(p) * NW'(q);
        hist.delete();
        x_valid = 0; y_valid = 0;
        @(negedge clk); @(negedge clk);
      end
      x_valid = $urandom % 2;
      y_valid = $urandom % 2;
      case ($urandom % 6)
        0: x_cand = p;
        1: x_cand = 32'd1;
        2: x_cand = 32'd0;
        default: x_cand = $urandom | 1;
      endcase
      case ($urandom % 6)
        0: y_cand = q;
        1: y_cand = FW'(n_val);
        default: y_cand = $urandom % 3000;
      endcase
      hist.push_back('{xh: x_valid && divides(n_val, x_cand), yh: y_valid && divides(n_val, y_cand),
                       xd: x_cand, yd: y_cand});
    end
    checks++;
    if (hits_x == 0 || hits_y == 0) begin failures++; $display("FAIL hits x=%0d y=%0d", hits_x, hits_y); end
    $display("hits x=%0d y=%0d", hits_x, hits_y);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
