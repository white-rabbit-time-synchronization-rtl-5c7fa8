// fast_trigger: leading-edge trigger of one detector channel.
//
// A fast trapezoidal filter is formed as the difference of two running sums of
// fast_len samples, separated by fast_gap samples:
//   ff[n] = sum_{k=0}^{L-1} x[n-k] - sum_{k=L+G}^{2L+G-1} x[n-k]
// Each sum is updated incrementally from a sample history, so a sample costs
// two additions per sum whatever L is. A trigger is issued on the rising edge
// of a pulse: the first sample where ff reaches the threshold after ff has been
// below it (the filter re-arms when it falls below the threshold again).
// The paper states only that triggers are issued on the rising edge; the
// trapezoid and the re-arm rule follow common digital pulse-processor practice
// and are this design's choice.
//
// Interface: adc is sampled on every clock; ff and trig are registered and
// belong to the same sample (trig is high in the cycle whose ff first reaches
// the threshold). While run is low the history and sums are cleared, so the
// filter lengths may only be changed with run low.
module fast_trigger
  import pnxl_pkg::*;
#(
  parameter int unsigned W = ADC_W
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                run,
  input  logic [W-1:0]        adc,
  input  logic [4:0]          fast_len,   // 1..FL_MAX
  input  logic [4:0]          fast_gap,   // 0..FG_MAX
  input  logic [15:0]         threshold,
  output logic signed [23:0]  ff,
  output logic                trig
);
  localparam int unsigned HD = 2 * FL_MAX + FG_MAX;  // deepest tap: 2L+G

  logic [W-1:0] hist [HD];     // hist[k] = sample k+1 clocks old
  logic [W-1:0] e [HD + 1];    // e[0] = new sample, e[k] = hist[k-1]
  logic signed [23:0] s_new, s_old, s_new_n, s_old_n, ff_n;
  logic armed;
  logic [7:0] l, g;

  always_comb begin
    e[0] = adc;
    for (int k = 1; k <= HD; k++) e[k] = hist[k-1];
    l = (fast_len == 0) ? 8'd1 : 8'(fast_len);
    g = 8'(fast_gap);
    s_new_n = s_new + 24'(e[0])   - 24'(e[l]);
    s_old_n = s_old + 24'(e[l+g]) - 24'(e[2*l+g]);
    ff_n    = s_new_n - s_old_n;
  end

  always_ff @(posedge clk) begin
    if (rst || !run) begin
      for (int k = 0; k < HD; k++) hist[k] <= '0;
      s_new <= '0;
      s_old <= '0;
      ff    <= '0;
      trig  <= 1'b0;
      armed <= 1'b0;
    end else begin
      hist[0] <= adc;
      for (int k = 1; k < HD; k++) hist[k] <= hist[k-1];
      s_new <= s_new_n;
      s_old <= s_old_n;
      ff    <= ff_n;
      trig  <= armed && (ff_n >= $signed({8'd0, threshold}));
      armed <= (ff_n < $signed({8'd0, threshold}));
    end
  end
endmodule
