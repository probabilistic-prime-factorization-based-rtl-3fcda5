// AXI4-Lite register slave through which the host hands the machine its
// problem: the 64-bit semiprime N and the 32-bit LFSR seed.
//
// Register map (32-bit words, byte address):
//   0x00  N[31:0]           read/write
//   0x04  N[63:32]          read/write
//   0x08  seed              read/write
//   0x0C  control           bit 0: write 1 to start (reads 0),
//                           bit 1: candidate sieve on (reset 1),
//                           bit 2: decision block on (reset 1)
//   0x10  status            read only, bit 0: done, bit 1: busy
// A write is taken when address and data are both valid and no response is
// pending, and answered with OKAY one cycle later; byte strobes are honoured.
// A read is answered one cycle after the address. Writing 1 to control bit 0
// gives a one-cycle `start` pulse. Unmapped addresses read 0 and ignore
// writes. That an AXI block carries N and the seed is from the paper; the
// register map, the control bits and the status word are this design's own.
// The block runs on the machine clock; the paper's host side runs on a
// faster clock, and any clock crossing is left to the system around it.
module axi_input_regs (
  input  logic        clk,
  input  logic        rst_n,
  // write address / data / response
  input  logic [4:0]  s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic [3:0]  s_wstrb,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  // read address / data
  input  logic [4:0]  s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready,
  // to and from the machine
  output logic [63:0] n_val,
  output logic [31:0] seed,
  output logic        start,
  output logic        sieve_en,
  output logic        decision_en,
  input  logic        done,
  input  logic        busy
);

  localparam logic [4:0] A_NLO = 5'h00, A_NHI = 5'h04, A_SEED = 5'h08, A_CTRL = 5'h0C,
                         A_STAT = 5'h10;

  function automatic logic [31:0] merge(input logic [31:0] old, input logic [31:0] wd,
                                        input logic [3:0] st);
    logic [31:0] r;
    for (int b = 0; b < 4; b++) r[8*b +: 8] = st[b] ? wd[8*b +: 8] : old[8*b +: 8];
    return r;
  endfunction

  logic wr;
  assign wr        = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wr;
  assign s_wready  = wr;
  assign s_bresp   = 2'b00;
  assign s_arready = !s_rvalid;
  assign s_rresp   = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_val       <= '0;
      seed        <= '0;
      start       <= 1'b0;
      sieve_en    <= 1'b1;
      decision_en <= 1'b1;
      s_bvalid    <= 1'b0;
    end else begin
      start <= 1'b0;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr) begin
        s_bvalid <= 1'b1;
        unique case ({s_awaddr[4:2], 2'b00})
          A_NLO:  n_val[31:0]  <= merge(n_val[31:0], s_wdata, s_wstrb);
          A_NHI:  n_val[63:32] <= merge(n_val[63:32], s_wdata, s_wstrb);
          A_SEED: seed         <= merge(seed, s_wdata, s_wstrb);
          A_CTRL: if (s_wstrb[0]) begin
            start       <= s_wdata[0];
            sieve_en    <= s_wdata[1];
            decision_en <= s_wdata[2];
          end
          default: ;
        endcase
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
    end else begin
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        unique case ({s_araddr[4:2], 2'b00})
          A_NLO:   s_rdata <= n_val[31:0];
          A_NHI:   s_rdata <= n_val[63:32];
          A_SEED:  s_rdata <= seed;
          A_CTRL:  s_rdata <= {29'd0, decision_en, sieve_en, 1'b0};
          A_STAT:  s_rdata <= {30'd0, busy, done};
          default: s_rdata <= '0;
        endcase
      end
    end
  end

  // AXI rule: a response, once valid, stays valid and unchanged until taken.
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  s_bvalid && !s_bready |=> s_bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));

endmodule
