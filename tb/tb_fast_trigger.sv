// tb_fast_trigger: checks the fast trapezoid value on every sample against a
// direct (non-incremental) sum over the stimulus, and checks that the trigger
// fires exactly on the first sample of each rising edge that reaches the
// threshold, for noisy exponential pulses and several filter settings.
module tb_fast_trigger;
  import pnxl_pkg::*;
  localparam int NS = 1200;
  logic clk = 0, rst = 1, run = 0;
  logic [ADC_W-1:0] adc = '0;
  logic [4:0] fl, fg;
  logic [15:0] thr;
  logic signed [23:0] ff;
  logic trig;
  int checks = 0, failures = 0, ntrig = 0;
  int xs [NS + 1];

  fast_trigger dut (.clk, .rst, .run, .adc, .fast_len(fl), .fast_gap(fg), .threshold(thr), .ff, .trig);

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int xv(int i);
    return (i < 1) ? 0 : xs[i];
  endfunction

  task automatic one_run(int l, int g, int th);
    int exp_ff, prev_ff;
    bit armed;
    fl = 5'(l); fg = 5'(g); thr = 16'(th);
    // stimulus: baseline 300, noise, pulses every 150 samples
    for (int i = 1; i <= NS; i++) begin
      real v;
      v = 300.0 + $itor($urandom_range(0, 6));
      for (int p = 100; p < NS; p += 150)
        if (i >= p) v += 800.0 * $exp(-$itor(i - p) / 40.0);
      xs[i] = int'(v);
    end
    @(negedge clk); run = 0;
    @(negedge clk); run = 1; adc = ADC_W'(xs[1]);
    armed = 0;
    for (int i = 1; i <= NS; i++) begin
      @(negedge clk);
      exp_ff = 0;
      for (int k = 0; k < l; k++) exp_ff += xv(i - k);
      for (int k = l + g; k < 2 * l + g; k++) exp_ff -= xv(i - k);
      checks++;
      if (ff !== 24'(exp_ff)) begin
        failures++;
        if (failures < 5) $display("ff mismatch at %0d: %0d vs %0d", i, ff, exp_ff);
      end
      checks++;
      if (trig !== (armed && exp_ff >= th)) begin
        failures++;
        if (failures < 5) $display("trig mismatch at %0d", i);
      end
      if (trig) ntrig++;
      armed = exp_ff < th;
      if (i < NS) adc = ADC_W'(xs[i + 1]);
    end
    run = 0;
  endtask

  initial begin
    fl = 4; fg = 2; thr = 100;
    repeat (3) @(negedge clk);
    rst = 0;
    one_run(4, 2, 400);
    one_run(1, 0, 150);
    one_run(FL_MAX, FG_MAX, 3000);
    one_run(8, 4, 1000);
    checks++;
    if (ntrig < 4 * 7) begin
      failures++;
      $display("too few triggers: %0d", ntrig);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
