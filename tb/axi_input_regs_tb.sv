// Testbench of axi_input_regs: AXI4-Lite writes of N, seed and control
// (with byte strobes, with the response held back), read-back of every
// register, the one-cycle start pulse and the status word.
module axi_input_regs_tb;
  logic clk = 0, rst_n = 0;
  logic [4:0] s_awaddr = 0, s_araddr = 0;
  logic s_awvalid = 0, s_wvalid = 0, s_bready = 0, s_arvalid = 0, s_rready = 0;
  logic [31:0] s_wdata = 0, s_rdata;
  logic [3:0] s_wstrb = 0;
  logic s_awready, s_wready, s_bvalid, s_arready, s_rvalid;
  logic [1:0] s_bresp, s_rresp;
  logic [63:0] n_val;
  logic [31:0] seed;
  logic start, sieve_en, decision_en;
  logic done = 0, busy = 0;
  int checks = 0, failures = 0, starts = 0;

  axi_input_regs dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && start) starts++;

  task automatic expect_eq(input longint unsigned got, input longint unsigned exp, input string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: %h expected %h", what, got, exp); end
  endtask

  task automatic axi_write(input logic [4:0] a, input logic [31:0] d, input logic [3:0] st,
                           input int bdelay);
    @(negedge clk);
    s_awaddr = a; s_awvalid = 1; s_wdata = d; s_wstrb = st; s_wvalid = 1;
    do @(posedge clk); while (!(s_awready && s_wready));
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0;
    repeat (bdelay) begin
      expect_eq(s_bvalid, 1, "bvalid held");
      @(negedge clk);
    end
    s_bready = 1;
    do @(posedge clk); while (!s_bvalid);
    expect_eq(s_bresp, 0, "bresp");
    @(negedge clk); s_bready = 0;
  endtask

  task automatic axi_read(input logic [4:0] a, output logic [31:0] d);
    @(negedge clk);
    s_araddr = a; s_arvalid = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk); s_arvalid = 0; s_rready = 1;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
    @(posedge clk);
    @(negedge clk); s_rready = 0;
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r;
    repeat (2) @(negedge clk);
    rst_n = 1;
    expect_eq(sieve_en, 1, "sieve on after reset");
    expect_eq(decision_en, 1, "decision on after reset");
    axi_write(5'h00, 32'hDEAD_BEEF, 4'hF, 0);
    axi_write(5'h04, 32'h0123_4567, 4'hF, 3);
    axi_write(5'h08, 32'hCAFE_F00D, 4'hF, 1);
    expect_eq(n_val, 64'h0123_4567_DEAD_BEEF, "N");
    expect_eq(seed, 32'hCAFE_F00D, "seed");
    axi_write(5'h08, 32'h0000_5500, 4'b0010, 0);
    expect_eq(seed, 32'hCAFE_550D, "seed byte write");
    expect_eq(starts, 0, "no start yet");
    axi_write(5'h0C, 32'h0000_0003, 4'h1, 0);   // start, sieve on, decision off
    expect_eq(starts, 1, "one start pulse");
    expect_eq(sieve_en, 1, "sieve");
    expect_eq(decision_en, 0, "decision off");
    axi_write(5'h1C, 32'hFFFF_FFFF, 4'hF, 0);   // unmapped
    expect_eq(n_val, 64'h0123_4567_DEAD_BEEF, "N unchanged");
    axi_read(5'h00, r); expect_eq(r, 32'hDEAD_BEEF, "read N lo");
    axi_read(5'h04, r); expect_eq(r, 32'h0123_4567, "read N hi");
    axi_read(5'h08, r); expect_eq(r, 32'hCAFE_550D, "read seed");
    axi_read(5'h0C, r); expect_eq(r, 32'h2, "read control");
    done = 1; busy = 0;
    axi_read(5'h10, r); expect_eq(r, 32'h1, "status done");
    done = 0; busy = 1;
    axi_read(5'h10, r); expect_eq(r, 32'h2, "status busy");
    axi_read(5'h14, r); expect_eq(r, 32'h0, "unmapped read");
    expect_eq(starts, 1, "still one start");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
