// tb_psa_sums: drives random samples, triggers at chosen samples and checks
// the three short sums against direct sums over the stimulus for windows
// before, at and after the trigger sample, and the capture latency.
module tb_psa_sums;
  import pnxl_pkg::*;
  localparam int NS = 3000;
  logic clk = 0, rst = 1, run = 0, trig = 0;
  logic [ADC_W-1:0] adc = '0;
  logic [2:0][7:0] st;
  logic [2:0][4:0] ln;
  logic [2:0][31:0] sums;
  logic valid;
  int checks = 0, failures = 0;
  int xs [NS + 1];

  psa_sums dut (.clk, .rst, .run, .adc, .trig, .psa_start(st), .psa_len(ln), .sums, .valid);

  always #5 clk = ~clk;

  initial begin
    #3_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sumx(int a, int n);
    int s = 0;
    for (int i = a; i < a + n; i++) if (i >= 1) s += xs[i];
    return s;
  endfunction

  task automatic one_run(int a0, int l0, int a1, int l1, int a2, int l2);
    int t_trig, seen;
    st = {8'(a2), 8'(a1), 8'(a0)};
    ln = {5'(l2), 5'(l1), 5'(l0)};
    for (int i = 1; i <= NS; i++) xs[i] = int'($urandom_range(0, 16383));
    @(negedge clk); run = 0;
    @(negedge clk); run = 1; adc = ADC_W'(xs[1]);
    seen = 0; t_trig = -1000;
    for (int i = 1; i <= NS; i++) begin
      @(negedge clk);
      trig = 0;
      if (valid) begin
        seen++;
        checks += 4;
        if (i - t_trig != PSA_CAP + 1) begin failures++; $display("latency %0d", i - t_trig); end
        if (sums[0] !== 32'(sumx(t_trig + a0, l0))) begin failures++; $display("sum0 bad (%0d,%0d)", a0, l0); end
        if (sums[1] !== 32'(sumx(t_trig + a1, l1))) begin failures++; $display("sum1 bad (%0d,%0d)", a1, l1); end
        if (sums[2] !== 32'(sumx(t_trig + a2, l2))) begin failures++; $display("sum2 bad (%0d,%0d)", a2, l2); end
      end
      if (i % 500 == 250) begin trig = 1; t_trig = i; end
      if (i < NS) adc = ADC_W'(xs[i + 1]);
    end
    checks++;
    if (seen != NS / 500) begin failures++; $display("captures %0d", seen); end
    run = 0;
  endtask

  initial begin
    st = '0; ln = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    one_run(-8, 8, 0, 8, 8, 16);
    one_run(-128, 31, -20, 1, 40, 25);
    one_run(-3, 5, 2, 30, 33, 31);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
