// trace_capture: full-speed waveform capture of one channel.
//
// Every ADC sample is written into a circular buffer of DEPTH samples. When a
// trigger arrives, the start of the waveform is set trace_pre samples before
// the trigger sample, and done rises once the remaining TRACE_LEN - trace_pre
// samples after the trigger have been written. The waveform is then read out
// two samples at a time through an asynchronous read port: rd_pair = p
// returns samples 2p (bits W-1:0) and 2p+1 (bits 2W-1:W). Writing pauses
// from done until clear, so a stalled readout cannot lose the waveform; for
// the first trace_pre samples after clear the pre-trigger part of a new
// waveform may therefore hold older samples. A new trigger is taken only
// after clear.
//
// The paper says full-speed waveforms are captured and that the events carry
// about 1 us of waveform; the circular buffer, pre-trigger length and read
// port are this design's choices.
module trace_capture
  import pnxl_pkg::*;
#(
  parameter int unsigned W     = ADC_W,
  parameter int unsigned DEPTH = 256,       // buffer size, power of two
  parameter int unsigned TLEN  = TRACE_LEN  // waveform length
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     run,
  input  logic [W-1:0]             adc,
  input  logic                     trig,      // trigger, aligned with the last written sample
  input  logic                     clear,     // waveform read out, re-arm
  input  logic [5:0]               trace_pre, // pre-trigger samples, < TLEN
  output logic                     done,
  input  logic [$clog2(TLEN)-1:0]  rd_pair,   // 0..TLEN/2-1
  output logic [2*W-1:0]           rd_data
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr, last, start;
  logic [7:0]    post;
  logic          busy;

  assign last    = wptr - AW'(1);                 // address of the newest sample
  assign rd_data = {mem[start + AW'(2 * rd_pair) + AW'(1)], mem[start + AW'(2 * rd_pair)]};

  always_ff @(posedge clk) begin
    if (run && !done) begin
      mem[wptr] <= adc;
    end
  end

  always_ff @(posedge clk) begin
    if (rst || !run) begin
      wptr  <= '0;
      start <= '0;
      post  <= '0;
      busy  <= 1'b0;
      done  <= 1'b0;
    end else begin
      if (!done) wptr <= wptr + AW'(1);
      if (clear) begin
        busy <= 1'b0;
        done <= 1'b0;
      end else if (trig && !busy) begin
        busy  <= 1'b1;
        start <= last - AW'(trace_pre);
        post  <= 8'(TLEN) - 8'(trace_pre) - 8'd1;  // samples still to come
        done  <= (8'(TLEN) - 8'(trace_pre) - 8'd1) == 0;
      end else if (busy && !done) begin
        post <= post - 8'd1;
        if (post == 8'd1) done <= 1'b1;
      end
    end
  end
endmodule
