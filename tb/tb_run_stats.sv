// tb_run_stats: drives random busy, trigger and event patterns over two runs
// and checks real time, live time, input and output counts against counts
// kept in the testbench, including the clear at the start of a run and the
// hold after it ends.
module tb_run_stats;
  logic clk = 0, rst = 1, run = 0, busy = 0, trig_in = 0, ev = 0;
  logic [47:0] rt, lt;
  logic [31:0] ic, oc;
  int checks = 0, failures = 0;
  longint e_rt, e_lt, e_ic, e_oc;

  run_stats dut (.clk, .rst, .run, .busy, .trig_in, .event_out(ev),
                 .real_time(rt), .live_time(lt), .in_count(ic), .out_count(oc));

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    checks += 4;
    if (rt !== 48'(e_rt)) begin failures++; $display("real %0d exp %0d", rt, e_rt); end
    if (lt !== 48'(e_lt)) begin failures++; $display("live %0d exp %0d", lt, e_lt); end
    if (ic !== 32'(e_ic)) begin failures++; $display("in %0d exp %0d", ic, e_ic); end
    if (oc !== 32'(e_oc)) begin failures++; $display("out %0d exp %0d", oc, e_oc); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int r = 0; r < 2; r++) begin
      @(negedge clk);
      run = 1;
      e_rt = 0; e_lt = 0; e_ic = 0; e_oc = 0;
      @(negedge clk);   // first clock of the run only clears
      for (int i = 0; i < 2000 + 500 * r; i++) begin
        busy = ($urandom_range(0, 2) == 0);
        trig_in = ($urandom_range(0, 9) == 0);
        ev = ($urandom_range(0, 19) == 0);
        @(negedge clk);
        e_rt++;
        if (!busy) e_lt++;
        if (trig_in) e_ic++;
        if (ev) e_oc++;
        if (i % 100 == 0) check_all();
      end
      run = 0; busy = 0; trig_in = 1; ev = 1;
      repeat (10) @(negedge clk);
      check_all();   // held after the run
      trig_in = 0; ev = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
