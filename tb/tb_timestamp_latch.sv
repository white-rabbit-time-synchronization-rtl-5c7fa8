// tb_timestamp_latch: runs the local time counter, drives a White Rabbit time
// that advances by one 8 ns cycle per clock (with a seconds rollover), and
// checks the latched local time, White Rabbit time and 16 ns record word at
// random triggers, and the counter reset when run falls.
module tb_timestamp_latch;
  import pnxl_pkg::*;
  logic clk = 0, rst = 1, run = 0, trig = 0;
  wr_time_t wr;
  logic [47:0] now, lts;
  wr_time_t wts;
  logic [31:0] word;
  int checks = 0, failures = 0;
  longint edges;

  timestamp_latch dut (.clk, .rst, .run, .trig, .wr_time(wr), .local_now(now), .local_ts(lts),
                       .wr_ts(wts), .wr_word(word));

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // White Rabbit time: 125,000,000 cycles per second
  always @(posedge clk) begin
    if (wr.cycles == 28'd124_999_999) begin
      wr.cycles  <= '0;
      wr.tai_sec <= wr.tai_sec + 40'd1;
    end else wr.cycles <= wr.cycles + 28'd1;
  end

  initial begin
    wr.tai_sec = 40'h12_3456_789A; wr.cycles = 28'd124_999_000;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int r = 0; r < 2; r++) begin
      run = 1; edges = 0;
      for (int i = 0; i < 3000; i++) begin
        wr_time_t w_at;
        longint e_at;
        trig = ($urandom_range(0, 99) < 5);
        w_at = wr; e_at = edges;
        @(posedge clk); edges++;
        @(negedge clk);
        checks++;
        if (now !== 48'(edges)) begin failures++; $display("now %0d exp %0d", now, edges); end
        if (trig) begin
          checks += 3;
          if (lts !== 48'(e_at)) begin failures++; $display("local ts %0d exp %0d", lts, e_at); end
          if (wts !== w_at) begin failures++; $display("wr ts"); end
          if (word !== {w_at.tai_sec[4:0], w_at.cycles[27:1]}) begin failures++; $display("wr word"); end
        end
      end
      trig = 0; run = 0;
      @(negedge clk);
      checks++;
      if (now !== 48'd0) begin failures++; $display("counter not cleared"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
