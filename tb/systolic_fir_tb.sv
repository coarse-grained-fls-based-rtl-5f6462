// systolic_fir_tb: self-checking testbench of the 15-tap systolic moving-average
// FIR filter at its default sizes.
//
// Phase 1 runs a descending-altitude landing profile like the one the filter
// was designed for: a distance falling from about 50 m to about 9 m (10 LSB per
// metre), with two bumps and uniform noise, fed one sample per clock with
// occasional idle clocks (en = 0). Phase 2 reprograms the coefficients to a
// random 0/1 pattern (a shorter, gapped window) and checks the read-back.
// Each output is compared with sum_k c_k * x[n-k] computed here from the sample
// history (the TAPS-1 outputs right after a coefficient change, which still
// mix old and new coefficients, are not compared); data_valid must follow each accepted sample by exactly one clock.
module systolic_fir_tb;
  import algas3_pkg::*;
  localparam int unsigned TAPS = FIR_TAPS, V = FIR_V_BITS, Z = FIR_Z_BITS, M = FIR_M_BITS;
  localparam int unsigned A = $clog2(TAPS);

  logic clk = 0, rst, en, we, dvalid;
  logic [V-1:0] din;
  logic [A-1:0] addr;
  logic [Z-1:0] cdata, crd;
  logic [M-1:0] dout;
  int checks = 0, failures = 0;
  int unsigned hist [TAPS];       // hist[k] = x[n-k]
  int unsigned coefs [TAPS];
  int unsigned exp_out;
  logic exp_valid;
  int unsigned n_samples = 0, n_idle = 0;

  systolic_fir dut (.clk, .rst, .en, .data_in(din), .coef_we(we), .coef_addr(addr),
                    .coef_data(cdata), .coef_rd(crd), .data_out(dout), .data_valid(dvalid));
  always #5 clk = ~clk;

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  // Landing profile: 50 m to 9 m over npts samples, bumps at 35% and 68%.
  function automatic int unsigned profile(int i, int npts);
    int d;
    d = 500 - (410 * i) / npts;
    if (i > npts * 33 / 100 && i < npts * 37 / 100) d += 30;
    if (i > npts * 66 / 100 && i < npts * 70 / 100) d += 40;
    d += $urandom_range(0, 60) - 30;
    if (d < 0) d = 0;
    if (d > 1023) d = 1023;
    return d;
  endfunction

  int unsigned skip = 0;   // outputs still mixing old and new coefficients

  task automatic push(int unsigned x);
    en = 1; din = V'(x);
    @(posedge clk);
    for (int k = TAPS - 1; k > 0; k--) hist[k] = hist[k-1];
    hist[0] = x;
    exp_out = 0;
    for (int k = 0; k < TAPS; k++) exp_out += coefs[k] * hist[k];
    n_samples++;
    #1;
    check(dvalid == 1'b1, "data_valid one clock after sample");
    if (skip > 0) skip--;
    else check(dout == M'(exp_out), "data_out");
    en = 0;
  endtask

  task automatic idle();
    en = 0;
    @(posedge clk); #1;
    n_idle++;
    check(dvalid == 1'b0, "no data_valid after idle clock");
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rst = 1; en = 0; we = 0; addr = '0; cdata = '0; din = '0;
    foreach (hist[k]) hist[k] = 0;
    foreach (coefs[k]) coefs[k] = 1;
    repeat (2) @(posedge clk); #1;
    rst = 0;
    check(dout == '0 && dvalid == 1'b0, "reset state");
    // read back default coefficients
    for (int k = 0; k < TAPS; k++) begin addr = A'(k); #1; check(crd == Z'(1), "default coef"); end
    // phase 1: landing profile
    for (int i = 0; i < 600; i++) begin
      push(profile(i, 600));
      if ($urandom_range(0, 9) == 0) idle();
    end
    // phase 2: random coefficient pattern
    for (int k = 0; k < TAPS; k++) begin
      coefs[k] = $urandom_range(0, 1);
      @(negedge clk); we = 1; addr = A'(k); cdata = Z'(coefs[k]);
      @(posedge clk); #1; we = 0;
    end
    for (int k = 0; k < TAPS; k++) begin addr = A'(k); #1; check(crd == Z'(coefs[k]), "coef readback"); end
    // partial sums already in the chain were formed with the old coefficients
    skip = TAPS - 1;
    for (int i = 0; i < 300; i++) begin
      push($urandom_range(0, 1023));
      if ($urandom_range(0, 9) == 0) idle();
    end
    check(n_idle > 0, "idle clocks exercised");
    $display("samples=%0d idle=%0d", n_samples, n_idle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
