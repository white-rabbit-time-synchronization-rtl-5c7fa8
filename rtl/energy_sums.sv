// energy_sums: trapezoidal energy filter sums of one channel.
//
// Three running sums are kept over the sample history, newest first:
//   s1 (trailing) over the newest slow_len samples,
//   sg (gap)      over the next slow_gap samples,
//   s0 (leading)  over the slow_len samples before those.
// They are updated incrementally (one add and one subtract per sum and sample).
// slow_len samples after a trigger, the three sums are latched and presented
// with a one-cycle valid pulse; the trailing sum then holds the samples
// following the trigger sample, and a pulse that starts within the gap is
// fully measured. energy_recon turns the sums into a pulse height.
//
// The paper names the capture of trapezoidal filter sums; the split into
// three sums and the capture point slow_len samples after the trigger follow
// earlier Pixie modules as this design reads them, and are its own choice.
// While run is low the history and sums are cleared; change lengths only then.
module energy_sums
  import pnxl_pkg::*;
#(
  parameter int unsigned W = ADC_W
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          run,
  input  logic [W-1:0]  adc,
  input  logic [6:0]    slow_len,   // 1..SL_MAX
  input  logic [5:0]    slow_gap,   // 0..SG_MAX
  input  logic          trig,       // trigger, aligned with the newest history sample
  output logic [W+6:0]  s0,
  output logic [W+6:0]  sg,
  output logic [W+6:0]  s1,
  output logic          valid
);
  localparam int unsigned HD = 2 * SL_MAX + SG_MAX;
  localparam int unsigned SW = W + 7;

  logic [W-1:0] hist [HD];
  logic [W-1:0] e [HD + 1];
  logic [SW-1:0] r0, rg, r1;
  logic [SW-1:0] r0_n, rg_n, r1_n;
  logic [7:0] cnt;
  logic busy;
  logic [8:0] l, g;

  always_comb begin
    e[0] = adc;
    for (int k = 1; k <= HD; k++) e[k] = hist[k-1];
    l = (slow_len == 0) ? 9'd1 : 9'(slow_len);
    g = 9'(slow_gap);
    r1_n = r1 + SW'(e[0])   - SW'(e[l]);
    rg_n = rg + SW'(e[l])   - SW'(e[l+g]);
    r0_n = r0 + SW'(e[l+g]) - SW'(e[2*l+g]);
  end

  always_ff @(posedge clk) begin
    if (rst || !run) begin
      for (int k = 0; k < HD; k++) hist[k] <= '0;
      r0 <= '0; rg <= '0; r1 <= '0;
      s0 <= '0; sg <= '0; s1 <= '0;
      valid <= 1'b0;
      busy  <= 1'b0;
      cnt   <= '0;
    end else begin
      hist[0] <= adc;
      for (int k = 1; k < HD; k++) hist[k] <= hist[k-1];
      r0 <= r0_n; rg <= rg_n; r1 <= r1_n;
      valid <= 1'b0;
      if (trig && !busy) begin
        busy <= 1'b1;
        cnt  <= 8'd1;
      end else if (busy) begin
        cnt <= cnt + 8'd1;
        if (cnt == 8'(l)) begin
          s0 <= r0; sg <= rg; s1 <= r1;
          valid <= 1'b1;
          busy  <= 1'b0;
        end
      end
    end
  end
endmodule
