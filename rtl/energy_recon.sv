// energy_recon: pulse height from the trapezoidal filter sums, with
// correction of the exponential decay of the preamplifier signal.
//
//   E = c0*(s0 - L*B) + cg*(sg - G*B) + c1*(s1 - L*B)
//
// B is the ADC baseline, L and G the filter rise time and gap, and c0, cg, c1
// signed Q1.30 coefficients computed by software from the decay constant:
// with b = exp(-Ts/tau), c1 = (1-b)/(1-b^L), cg = 1-b, c0 = -(1-b)*b^L/(1-b^L).
// For an exponential pulse that starts inside the gap E equals its amplitude,
// and the decaying tail of an earlier pulse contributes nothing.
// The paper says only that the decay is corrected and pulse heights are
// reconstructed from the sums; this formula is the one used by earlier Pixie
// modules as this design understands them, and the coefficient format and
// baseline register are this design's choices.
//
// Timing: a three-stage pipeline; energy and valid follow in_valid by three
// clocks. The result is clamped to 0..65535; the 30 fraction bits of the
// Q1.30 sum are dropped (truncation), so the low bits of acc go unused.
module energy_recon
  import pnxl_pkg::*;
#(
  parameter int unsigned SW = ADC_W + 7   // width of the input sums
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     in_valid,
  input  logic [SW-1:0]            s0,
  input  logic [SW-1:0]            sg,
  input  logic [SW-1:0]            s1,
  input  logic [6:0]               slow_len,
  input  logic [5:0]               slow_gap,
  input  logic [15:0]              baseline,
  input  logic signed [COEF_W-1:0] c0,
  input  logic signed [COEF_W-1:0] cg,
  input  logic signed [COEF_W-1:0] c1,
  output logic [15:0]              energy,
  output logic                     valid
);
  localparam int unsigned DW = SW + 2;            // baseline-corrected sums
  localparam int unsigned PW = DW + COEF_W;       // products
  localparam int unsigned AW = PW + 2;            // sum of products

  logic signed [DW-1:0] d0, dg, d1;
  logic signed [PW-1:0] p0, pg, p1;
  logic signed [AW-1:0] acc;
  logic signed [AW-COEF_FRAC-1:0] e_int;
  logic v1, v2;

  assign acc   = AW'(p0) + AW'(pg) + AW'(p1);
  assign e_int = acc[AW-1:COEF_FRAC];   // arithmetic shift, rounds toward -inf

  always_ff @(posedge clk) begin
    if (rst) begin
      v1 <= 1'b0; v2 <= 1'b0; valid <= 1'b0;
      d0 <= '0; dg <= '0; d1 <= '0;
      p0 <= '0; pg <= '0; p1 <= '0;
      energy <= '0;
    end else begin
      // stage 1: remove the baseline contribution from each sum
      v1 <= in_valid;
      d0 <= $signed({2'b0, s0}) - $signed(DW'(slow_len) * DW'(baseline));
      dg <= $signed({2'b0, sg}) - $signed(DW'(slow_gap) * DW'(baseline));
      d1 <= $signed({2'b0, s1}) - $signed(DW'(slow_len) * DW'(baseline));
      // stage 2: weight the sums
      v2 <= v1;
      p0 <= PW'(d0) * PW'(c0);
      pg <= PW'(dg) * PW'(cg);
      p1 <= PW'(d1) * PW'(c1);
      // stage 3: add, scale and clamp
      valid <= v2;
      if (e_int < 0)                energy <= '0;
      else if (e_int > 65535)       energy <= 16'hFFFF;
      else                          energy <= 16'(e_int);
    end
  end
endmodule
