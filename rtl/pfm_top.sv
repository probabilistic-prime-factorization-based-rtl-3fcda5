// Top of the probabilistic factorization machine as built on the FPGA.
//
// The host writes N, the seed and the start bit through the AXI4-Lite slave
// (axi_input_regs); the factorization core (vcbm_factorizer) then samples
// until its decision block finds a divisor. The results the host reads back,
// the two factors and the 64-bit operation time in samplings, are plain
// output ports here, where the paper attaches a logic-analyzer core, together
// with `done` and `busy`. NW and FW size the core (64-bit N, 32-bit factor
// registers, 31 p-bits); for NW below 64 the upper bits of the N register
// are ignored. One clock drives everything.
module pfm_top #(
  parameter int unsigned NW = 64,
  parameter int unsigned FW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [4:0]    s_awaddr,
  input  logic          s_awvalid,
  output logic          s_awready,
  input  logic [31:0]   s_wdata,
  input  logic [3:0]    s_wstrb,
  input  logic          s_wvalid,
  output logic          s_wready,
  output logic [1:0]    s_bresp,
  output logic          s_bvalid,
  input  logic          s_bready,
  input  logic [4:0]    s_araddr,
  input  logic          s_arvalid,
  output logic          s_arready,
  output logic [31:0]   s_rdata,
  output logic [1:0]    s_rresp,
  output logic          s_rvalid,
  input  logic          s_rready,
  output logic          done,
  output logic          busy,
  output logic [NW-1:0] x_out,
  output logic [NW-1:0] y_out,
  output logic [63:0]   op_time,
  // observation of the running machine
  output logic [FW-1:0] x_state,
  output logic [FW-1:0] y_state,
  output logic          phase,      // 0: X sampled this cycle, 1: Y
  output logic [1:0]    shift,
  output logic          iter_end,
  output logic [2:0]    sieve_sel
);

  logic [63:0] n_reg;
  logic [31:0] seed;
  logic        start, sieve_en, decision_en;
  pf_pkg::phase_e     ph;
  pf_pkg::sieve_sel_e sel;

  axi_input_regs u_axi (
    .clk(clk), .rst_n(rst_n),
    .s_awaddr(s_awaddr), .s_awvalid(s_awvalid), .s_awready(s_awready),
    .s_wdata(s_wdata), .s_wstrb(s_wstrb), .s_wvalid(s_wvalid), .s_wready(s_wready),
    .s_bresp(s_bresp), .s_bvalid(s_bvalid), .s_bready(s_bready),
    .s_araddr(s_araddr), .s_arvalid(s_arvalid), .s_arready(s_arready),
    .s_rdata(s_rdata), .s_rresp(s_rresp), .s_rvalid(s_rvalid), .s_rready(s_rready),
    .n_val(n_reg), .seed(seed), .start(start), .sieve_en(sieve_en),
    .decision_en(decision_en), .done(done), .busy(busy)
  );

  vcbm_factorizer #(.NW(NW), .FW(FW)) u_core (
    .clk(clk), .rst_n(rst_n), .start(start), .n_in(n_reg[NW-1:0]), .seed(seed),
    .sieve_en(sieve_en), .decision_en(decision_en), .busy(busy), .done(done),
    .x_out(x_out), .y_out(y_out), .op_time(op_time), .x_state(x_state), .y_state(y_state),
    .phase(ph), .shift(shift), .iter_end(iter_end), .sieve_sel(sel)
  );

  assign sieve_sel = sel;
  assign phase     = ph;

endmodule
