// tb_trace_capture: writes a counting pattern (sample value = sample index)
// into the waveform buffer, triggers with several pre-trigger lengths, waits
// for done, stalls the readout for a while (writing must pause) and checks
// every sample of the waveform read back in pairs.
module tb_trace_capture;
  import pnxl_pkg::*;
  logic clk = 0, rst = 1, run = 0, trig = 0, clear = 0;
  logic [ADC_W-1:0] adc = '0;
  logic [5:0] pre;
  logic done;
  logic [$clog2(TRACE_LEN)-1:0] pair;
  logic [2*ADC_W-1:0] data;
  int checks = 0, failures = 0;
  int idx = 0;

  trace_capture dut (.clk, .rst, .run, .adc, .trig, .clear, .trace_pre(pre), .done,
                     .rd_pair(pair), .rd_data(data));

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sample idx is presented before edge idx
  always @(negedge clk) if (run) begin idx++; adc = ADC_W'(idx); end

  task automatic shot(int p, int wait_before);
    int t, n;
    pre = 6'(p);
    repeat (wait_before) @(negedge clk);
    @(negedge clk);
    #1 trig = 1; t = idx - 1;   // the newest stored sample is the trigger sample
    @(negedge clk);
    #1 trig = 0;
    n = 0;
    while (!done && n < 400) begin @(negedge clk); n++; end
    checks++;
    if (!done) begin failures++; $display("no done"); end
    repeat (300) @(negedge clk);   // slow readout: the buffer must hold still
    for (int k = 0; k < TRACE_LEN / 2; k++) begin
      pair = ($clog2(TRACE_LEN))'(k);
      #1;
      checks += 2;
      if (data[ADC_W-1:0] !== ADC_W'(t - p + 2 * k)) begin
        failures++;
        if (failures < 6) $display("pre %0d sample %0d: %0d exp %0d", p, 2 * k, data[ADC_W-1:0], t - p + 2 * k);
      end
      if (data[2*ADC_W-1:ADC_W] !== ADC_W'(t - p + 2 * k + 1)) failures++;
    end
    @(negedge clk); #1 clear = 1;
    @(negedge clk); #1 clear = 0;
  endtask

  initial begin
    pre = 0; pair = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    run = 1;
    shot(16, 200);
    shot(0, 300);
    shot(63, 150);
    shot(5, 257);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
