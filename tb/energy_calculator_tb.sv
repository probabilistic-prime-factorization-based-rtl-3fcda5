// Testbench of energy_calculator: every I_k against the cost-function
// formula I_k = 2^s (2^(3+k-2n) (N-UV) V +/- 2^(1+2k-2n) V^2) evaluated in
// floating point, then scaled by 16, floored and clamped to -128..127.
// Small problems (n <= 24) must match exactly; 64-bit ones within one LSB,
// since a double cannot hold their products exactly. Also checks `exact`.
module energy_calculator_tb;
  localparam int NW = 64, FW = 32, NPB = 31, NBW = 7;
  logic [NW-1:0]  n_val;
  logic [NBW-1:0] n_bits;
  logic [1:0]     shift;
  logic [FW-1:0]  u, v;
  logic [7:0]     ik [NPB];
  logic           exact;
  int checks = 0, failures = 0, sat_seen = 0, mid_seen = 0;

  energy_calculator #(.NW(NW), .FW(FW), .NPB(NPB), .NBW(NBW)) dut (.*);

  function automatic int ref_ik(input longint unsigned nv, input int nb, input int s,
                                input longint unsigned uu, input longint unsigned vv, input int k);
    real a, b, t, r;
    int  f;
    a = (real'(nv) - real'(uu) * real'(vv)) * real'(vv);
    b = real'(vv) * real'(vv);
    t = a * (2.0 ** (3 + k - 2 * nb));
    r = b * (2.0 ** (1 + 2 * k - 2 * nb));
    t = ((uu >> k) & 1) ? t + r : t - r;
    t = t * (2.0 ** s) * 16.0;
    if (t >= 127.0) return 127;
    if (t <= -128.0) return -128;
    f = $rtoi(t);                 // truncates towards zero
    if (real'(f) > t) f = f - 1;  // floor
    return f;
  endfunction

  task automatic run_case(input longint unsigned nv, input longint unsigned uu,
                          input longint unsigned vv, input int s, input int tol);
    int nb;
    nb = 0;
    for (int i = 0; i < 64; i++) if ((nv >> i) & 1) nb = i + 1;
    n_val = nv; n_bits = NBW'(nb); shift = 2'(s); u = FW'(uu); v = FW'(vv);
    #1;
    for (int j = 0; j < NPB; j++) begin
      int e, g;
      e = ref_ik(nv, nb, s, uu, vv, j + 1);
      g = int'($signed(ik[j]));
      if (g == 127 || g == -128) sat_seen++; else mid_seen++;
      checks++;
      if (g - e > tol || e - g > tol) begin
        failures++;
        if (failures < 10)
          $display("FAIL N=%0d U=%0d V=%0d s=%0d k=%0d: ik=%0d expected %0d", nv, uu, vv, s, j + 1, g, e);
      end
    end
    checks++;
    if (exact !== (nv == uu * vv)) begin failures++; $display("FAIL exact"); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // small problems, exact in double precision
    for (int t = 0; t < 300; t++) begin
      int h;
      longint unsigned p, q, uu, vv;
      h = 5 + (t % 8);                       // factor bits 5..12
      p = (longint'($urandom) % (1 << h)) | 1 | (1 << (h - 1));
      q = (longint'($urandom) % (1 << h)) | 1 | (1 << (h - 1));
      uu = (longint'($urandom) % (1 << h)) | 1;
      vv = (t % 5 == 0) ? q : ((longint'($urandom) % (1 << h)) | 1);
      if (t % 7 == 0) uu = p;
      run_case(p * q, uu, vv, t % 4, 0);
    end
    // 64-bit problems, one LSB tolerance
    for (int t = 0; t < 200; t++) begin
      longint unsigned p, q, uu, vv;
      p = longint'($urandom) | 64'h8000_0001;
      q = longint'($urandom) | 64'h8000_0001;
      uu = p ^ (longint'($urandom) & 64'h0000_FFFE);
      vv = q ^ (longint'($urandom) & 64'h0000_00FE);
      run_case(p * q, uu, vv, t % 4, 1);
    end
    checks++;
    if (sat_seen == 0 || mid_seen == 0) begin
      failures++;
      $display("FAIL coverage sat=%0d mid=%0d", sat_seen, mid_seen);
    end
    $display("saturated=%0d in-range=%0d", sat_seen, mid_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
