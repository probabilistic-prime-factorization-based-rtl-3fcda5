// Testbench of modulo_operator: back-to-back random operands, each result
// (remainder, quotient, divisor) checked against % and / exactly two clocks
// after it entered, and no result without an operand.
module modulo_operator_tb;
  localparam int NW = 64, DW = 32;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [NW-1:0] n_val, quo;
  logic [DW-1:0] d, rem, d_out;
  logic out_valid;
  int checks = 0, failures = 0;
  logic [NW-1:0] hn [$];
  logic [DW-1:0] hd [$];
  logic          hv [$];

  modulo_operator #(.NW(NW), .DW(DW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      // compare what entered two clocks ago
      if (hv.size() == 2) begin
        logic [NW-1:0] en_; logic [DW-1:0] ed; logic ev;
        en_ = hn.pop_front(); ed = hd.pop_front(); ev = hv.pop_front();
        checks++;
        if (out_valid !== ev) begin failures++; $display("FAIL valid latency at %0d", c); end
        if (ev) begin
          checks++;
          if (rem !== DW'(en_ % NW'(ed)) || quo !== en_ / NW'(ed) || d_out !== ed) begin
            failures++;
            if (failures < 10) $display("FAIL %0d / %0d: rem %0d quo %0d", en_, ed, rem, quo);
          end
        end
      end
      in_valid = ($urandom % 4) != 0;
      n_val = {$urandom, $urandom};
      case (c % 4)
        0: d = $urandom | 1;
        1: d = ($urandom % 1000) + 1;
        2: begin d = $urandom | 1; n_val = NW'(d) * NW'($urandom); end  // exact multiple
        default: d = ($urandom >> ($urandom % 31)) | 1;
      endcase
      hn.push_back(n_val); hd.push_back(d); hv.push_back(in_valid);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
