// tb_cfd_timing: feeds trapezoid-shaped filter outputs of random amplitude,
// rise time and sub-sample offset, triggers where the filter first exceeds a
// threshold, and checks the reported crossing (whole part and 16-bit
// fraction) against a reference computed in the testbench with 64-bit
// arithmetic. Also checks the "not found" case and that the timing does not
// depend on the amplitude.
module tb_cfd_timing;
  import pnxl_pkg::*;
  logic clk = 0, rst = 1, run = 0, trig = 0;
  logic signed [23:0] ff = '0;
  logic [3:0] dly;
  logic [7:0] w;
  logic signed [7:0] ci;
  logic [15:0] cf;
  logic found, done;
  int checks = 0, failures = 0;
  int fv [300];

  cfd_timing dut (.clk, .rst, .run, .ff, .trig, .cfd_delay(dly), .cfd_w(w),
                  .cfd_int(ci), .cfd_frac(cf), .found, .done);

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint cval(int n, int d, int wt);
    longint a, b;
    a = (n - d >= 0) ? longint'(fv[n - d]) : 0;
    b = (n >= 0) ? longint'(fv[n]) : 0;
    return 256 * a - longint'(wt) * b;
  endfunction

  // amp <= 0 gives a flat input with no crossing
  task automatic shot(int amp, int rise, real off, int d, int wt, int thr);
    int t, m_found, e_int, lat;
    longint p, c, e_frac;
    dly = 4'(d); w = 8'(wt);
    for (int n = 0; n < 300; n++) begin
      real x;
      x = ($itor(n) - 100.0 - off) / $itor(rise);
      if (x < 0.0) x = 0.0;
      if (x > 1.0) x = 1.0;
      fv[n] = int'($itor(amp) * x);
    end
    t = -1;
    for (int n = 0; n < 300; n++) if (t < 0 && fv[n] >= thr) t = n;
    if (amp <= 0) t = 150;
    // reference
    m_found = 0; e_int = 0; e_frac = 0;
    for (int j = 0; j < CFD_WIN; j++) begin
      int m;
      m = t - CFD_PRE + j;
      p = cval(m - 1, d, wt); c = cval(m, d, wt);
      if (!m_found && p < 0 && c >= 0) begin
        m_found = 1;
        e_int = m - 1 - t;
        e_frac = ((-p) * 65536) / (c - p);
        if (e_frac > 65535) e_frac = 65535;
      end
    end
    // drive: ff[n] is presented in cycle n, trig with ff[t]
    @(negedge clk); run = 0;
    @(negedge clk); run = 1;
    lat = -1;
    for (int n = 0; n < 300; n++) begin
      ff = 24'(fv[n]);
      trig = (n == t);
      @(negedge clk);
      if (done) begin
        lat = n - t;
        checks += 3;
        if (found !== 1'(m_found)) begin failures++; $display("found %0d exp %0d", found, m_found); end
        if (m_found && ci !== 8'(e_int)) begin failures++; $display("int %0d exp %0d", ci, e_int); end
        if (m_found && cf !== 16'(e_frac)) begin failures++; $display("frac %0d exp %0d", cf, e_frac); end
      end
    end
    trig = 0;
    checks++;
    if (lat < 0 || lat > CFD_PRE + CFD_WIN + 18) begin failures++; $display("done latency %0d", lat); end
  endtask

  initial begin
    dly = 2; w = 128;
    repeat (3) @(negedge clk);
    rst = 0;
    shot(4000, 8, 0.0, 2, 128, 300);
    shot(4000, 8, 0.37, 2, 128, 300);
    shot(1000, 8, 0.37, 2, 128, 75);     // same shape, quarter amplitude
    shot(20000, 20, 0.8, 6, 64, 1000);
    shot(500, 3, 0.1, 1, 200, 100);
    shot(0, 8, 0.0, 2, 128, 100);        // no pulse: no crossing
    for (int k = 0; k < 30; k++)
      shot(int'($urandom_range(200, 60000)), int'($urandom_range(2, 24)), $itor($urandom_range(0, 99)) / 100.0,
           int'($urandom_range(1, 15)), int'($urandom_range(16, 240)), 50);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
