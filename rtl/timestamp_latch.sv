// timestamp_latch: internal and external time stamps of one channel.
//
// A 48-bit local time counter advances on every processing clock while run is
// high and is cleared when run is low (8 ns per count at 125 MHz). On a
// trigger, the local count and the White Rabbit date/time (40-bit TAI seconds,
// 28-bit 8 ns cycles) are latched. The 32-bit White Rabbit word placed in the
// event record is derived from the latched time with 16 ns granularity:
// {tai_sec[4:0], cycles[27:1]}.
//
// The paper states that the White Rabbit time can be latched as an additional
// time stamp for each event and that records carry 32-bit words of White
// Rabbit date/time in 16 ns granularity; which bits form that word is this
// design's choice. Latched values appear the clock after trig.
module timestamp_latch
  import pnxl_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        run,
  input  logic        trig,
  input  wr_time_t    wr_time,
  output logic [47:0] local_now,
  output logic [47:0] local_ts,
  output wr_time_t    wr_ts,
  output logic [31:0] wr_word
);
  assign wr_word = {wr_ts.tai_sec[4:0], wr_ts.cycles[27:1]};

  always_ff @(posedge clk) begin
    if (rst || !run) begin
      local_now <= '0;
    end else begin
      local_now <= local_now + 48'd1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      local_ts <= '0;
      wr_ts    <= '0;
    end else if (trig) begin
      local_ts <= local_now;
      wr_ts    <= wr_time;
    end
  end
endmodule
