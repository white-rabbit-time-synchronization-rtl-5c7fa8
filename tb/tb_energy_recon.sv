// tb_energy_recon: forms the filter sums of sampled exponential pulses
// (amplitude A, decay time tau, on a baseline) in the testbench, with the
// pulse starting anywhere in the gap and with the tail of an earlier pulse
// in the leading sum, computes the coefficients from tau, and checks that
// the reconstructed energy equals A within +-2 and arrives three clocks
// after the sums. Also checks clamping at 0 and 65535.
module tb_energy_recon;
  import pnxl_pkg::*;
  localparam int SW = ADC_W + 7;
  logic clk = 0, rst = 1, in_valid = 0;
  logic [SW-1:0] s0, sg, s1;
  logic [6:0] sl;
  logic [5:0] sgap;
  logic [15:0] bl, energy;
  logic signed [COEF_W-1:0] c0, cg, c1;
  logic valid;
  int checks = 0, failures = 0;

  energy_recon dut (.clk, .rst, .in_valid, .s0, .sg, .s1, .slow_len(sl), .slow_gap(sgap),
                    .baseline(bl), .c0, .cg, .c1, .energy, .valid);

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(int e_lo, int e_hi);
    int lat;
    @(negedge clk);
    in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    lat = 1;
    while (!valid && lat < 10) begin @(negedge clk); lat++; end
    checks += 2;
    if (lat != 3) begin failures++; $display("latency %0d", lat); end
    if (int'(energy) < e_lo || int'(energy) > e_hi) begin
      failures++;
      $display("energy %0d not in [%0d,%0d]", energy, e_lo, e_hi);
    end
  endtask

  // sums of a sampled pulse train; sample n counts back from the capture point
  task automatic pulse_case(int l, int g, real tau, int base, int amp, int pos_in_gap, int old_amp);
    real b;
    int x [512];
    int n_tot, a, sa, sb, sc;
    b = $exp(-1.0 / tau);
    n_tot = 2 * l + g;
    // index 0 is the oldest sample of the leading sum
    for (int i = 0; i < n_tot; i++) begin
      real v;
      v = $itor(base);
      if (i >= l + pos_in_gap) v += $itor(amp) * (b ** $itor(i - l - pos_in_gap));
      v += $itor(old_amp) * (b ** $itor(i + 50));   // tail of an earlier pulse
      x[i] = int'(v);
    end
    sa = 0; sb = 0; sc = 0;
    for (int i = 0; i < l; i++) sa += x[i];
    for (int i = l; i < l + g; i++) sb += x[i];
    for (int i = l + g; i < n_tot; i++) sc += x[i];
    s0 = SW'(sa); sg = SW'(sb); s1 = SW'(sc);
    sl = 7'(l); sgap = 6'(g); bl = 16'(base);
    c1 = COEF_W'(longint'((1.0 - b) / (1.0 - b ** $itor(l)) * 1073741824.0));
    cg = COEF_W'(longint'((1.0 - b) * 1073741824.0));
    c0 = COEF_W'(longint'(-(1.0 - b) * (b ** $itor(l)) / (1.0 - b ** $itor(l)) * 1073741824.0));
    a = amp;
    if (amp < 0) apply(0, 0);   // clamped at zero
    else         apply(a - 2, a + 2);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    pulse_case(32, 8, 400.0, 1000, 3000, 0, 0);
    pulse_case(32, 8, 400.0, 1000, 3000, 7, 0);
    pulse_case(32, 8, 400.0, 1000, 3000, 3, 2000);
    pulse_case(64, 16, 6000.0, 200, 10000, 5, 0);
    pulse_case(16, 4, 50.0, 500, 700, 2, 4000);
    pulse_case(SL_MAX, SG_MAX, 2000.0, 0, 15000, 30, 0);
    for (int k = 0; k < 20; k++)
      pulse_case(int'($urandom_range(8, 100)), int'($urandom_range(2, 40)), 100.0 + $itor($urandom_range(0, 5000)),
                 int'($urandom_range(0, 2000)), int'($urandom_range(100, 12000)), 1, int'($urandom_range(0, 1000)));
    // clamping: a negative pulse and an oversize one
    pulse_case(32, 8, 400.0, 8000, -3000, 0, 0);
    s0 = '0; sg = '0; s1 = '1; c0 = 0; cg = 0; c1 = 32'sh3FFF_FFFF; bl = 0;
    apply(65535, 65535);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
