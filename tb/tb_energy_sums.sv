// tb_energy_sums: drives random samples, raises a trigger at chosen samples
// and checks the three latched sums against direct sums over the stimulus
// (trailing: the slow_len samples after the trigger sample; gap: the
// slow_gap samples ending at it; leading: the slow_len samples before the
// gap), and that they appear slow_len+1 clocks after the trigger.
module tb_energy_sums;
  import pnxl_pkg::*;
  localparam int NS = 2000;
  logic clk = 0, rst = 1, run = 0, trig = 0;
  logic [ADC_W-1:0] adc = '0;
  logic [6:0] sl;
  logic [5:0] sgap;
  logic [ADC_W+6:0] s0, sg, s1;
  logic valid;
  int checks = 0, failures = 0;
  int xs [NS + 1];

  energy_sums dut (.clk, .rst, .run, .adc, .slow_len(sl), .slow_gap(sgap), .trig, .s0, .sg, .s1, .valid);

  always #5 clk = ~clk;

  initial begin
    #3_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sumx(int a, int b);   // sum of xs[a..b], 0 before the run
    int s = 0;
    for (int i = a; i <= b; i++) if (i >= 1) s += xs[i];
    return s;
  endfunction

  task automatic one_run(int l, int g);
    int t_trig, seen, t_valid;
    sl = 7'(l); sgap = 6'(g);
    for (int i = 1; i <= NS; i++) xs[i] = int'($urandom_range(0, 16383));
    @(negedge clk); run = 0;
    @(negedge clk); run = 1; adc = ADC_W'(xs[1]);
    seen = 0; t_trig = -1;
    for (int i = 1; i <= NS; i++) begin
      @(negedge clk);
      trig = 0;
      if (valid) begin
        seen++;
        t_valid = i;
        checks += 4;
        if (t_valid - t_trig != l + 1) begin failures++; $display("latency %0d", t_valid - t_trig); end
        if (s1 !== (ADC_W+7)'(sumx(t_trig + 1, t_trig + l))) begin failures++; $display("s1 bad L=%0d G=%0d", l, g); end
        if (sg !== (ADC_W+7)'(sumx(t_trig - g + 1, t_trig))) begin failures++; $display("sg bad"); end
        if (s0 !== (ADC_W+7)'(sumx(t_trig - g - l + 1, t_trig - g))) begin failures++; $display("s0 bad"); end
      end
      // trigger every 400 samples; the trigger sample is the one just registered
      if (i % 400 == 399 && i < NS - 200) begin trig = 1; t_trig = i; end
      if (i < NS) adc = ADC_W'(xs[i + 1]);
    end
    checks++;
    if (seen != NS / 400 - 1) begin failures++; $display("captures %0d", seen); end
    run = 0;
  endtask

  initial begin
    sl = 1; sgap = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    one_run(32, 8);
    one_run(1, 0);
    one_run(SL_MAX, SG_MAX);
    one_run(17, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
