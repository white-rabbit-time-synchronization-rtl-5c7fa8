// sync_fifo: single-clock first-word-fall-through FIFO.
//
// In the design it stands for the output data buffer, which on the board is a
// dedicated 4 Gbit SDRAM run as a FIFO by a third-party controller; here the
// storage is a plain memory array of DEPTH words. The default depth,
// 2^27 words of 32 bits, equals the 4 Gbit of that SDRAM. It is also used,
// much smaller, for the metadata queue read by the Zynq processor.
//
// Interface: wr_en writes din when not full; dout shows the oldest word
// whenever empty is low and rd_en removes it. count is the fill level.
// Writing when full or reading when empty is ignored (and flagged by
// assertions in simulation). The SDRAM latency and refresh stalls are not
// modelled.
module sync_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 2 ** 27
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       wr_en,
  input  logic [W-1:0]               din,
  output logic                       full,
  input  logic                       rd_en,
  output logic [W-1:0]               dout,
  output logic                       empty,
  output logic [$clog2(DEPTH):0]     count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic          do_wr, do_rd;

  assign full  = (count == (AW+1)'(DEPTH));
  assign empty = (count == '0);
  assign dout  = mem[rptr];
  assign do_wr = wr_en && !full;
  assign do_rd = rd_en && !empty;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= din;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr <= '0; rptr <= '0; count <= '0;
    end else begin
      if (do_wr) wptr <= wptr + AW'(1);
      if (do_rd) rptr <= rptr + AW'(1);
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (rst) !(wr_en && full))
    else $error("sync_fifo: write while full");
  a_no_underflow: assert property (@(posedge clk) disable iff (rst) !(rd_en && empty))
    else $error("sync_fifo: read while empty");
endmodule
