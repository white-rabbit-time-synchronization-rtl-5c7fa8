// run_stats: run statistics of one channel.
//
// While run is high it counts the real time (every clock), the live time
// (clocks in which the channel is not busy with an event and can take a
// trigger), the input counts (every trigger, taken or not) and the output
// counts (events recorded). All counters clear when a run starts (rising edge
// of run) and hold their values after it ends, so software reads them after
// the run and forms count times and input/output rates from them.
// The paper lists count times and input and output rates; the counter set and
// widths are this design's choice.
module run_stats (
  input  logic        clk,
  input  logic        rst,
  input  logic        run,
  input  logic        busy,
  input  logic        trig_in,     // any trigger of the channel
  input  logic        event_out,   // one event recorded
  output logic [47:0] real_time,
  output logic [47:0] live_time,
  output logic [31:0] in_count,
  output logic [31:0] out_count
);
  logic run_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      run_q <= 1'b0;
      real_time <= '0; live_time <= '0; in_count <= '0; out_count <= '0;
    end else begin
      run_q <= run;
      if (run && !run_q) begin
        real_time <= '0; live_time <= '0; in_count <= '0; out_count <= '0;
      end else if (run) begin
        real_time <= real_time + 48'd1;
        if (!busy)     live_time <= live_time + 48'd1;
        if (trig_in)   in_count  <= in_count + 32'd1;
        if (event_out) out_count <= out_count + 32'd1;
      end
    end
  end
endmodule
