// psa_sums: three short sums for pulse shape analysis (for example
// neutron/gamma discrimination with liquid scintillators).
//
// Sum i covers psa_len[i] samples starting psa_start[i] samples from the
// trigger sample (psa_start is signed: negative values lie before the rising
// edge). All three sums are latched PSA_CAP samples after the trigger, so a
// window may reach up to PSA_CAP samples past the trigger; a window that
// would reach further is moved back to end at PSA_CAP. Each sum is a running
// sum over the sample history at a fixed delay D = PSA_CAP - start - len + 1,
// updated with one add and one subtract per sample.
//
// The paper gives three sums of programmable length and position before and
// after the rising edge; the fixed capture point, signed start encoding and
// widths are this design's choices. History and sums clear while run is low.
// Timing: valid pulses for one clock PSA_CAP+1 clocks after trig.
// The sums are delivered as 32-bit record words; at most 31 samples of
// ADC_W bits need only 19, so the upper 13 bits of each sum are always zero.
module psa_sums
  import pnxl_pkg::*;
#(
  parameter int unsigned W = ADC_W
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               run,
  input  logic [W-1:0]       adc,
  input  logic               trig,
  input  logic [2:0][7:0]    psa_start,   // signed
  input  logic [2:0][4:0]    psa_len,     // 1..PSA_LEN_MAX
  output logic [2:0][31:0]   sums,
  output logic               valid
);
  localparam int DMAX = PSA_CAP + 128 + PSA_LEN_MAX;   // deepest tap
  localparam int SW   = W + 5;

  logic [W-1:0]  hist [DMAX];
  logic [W-1:0]  e [DMAX + 1];
  logic [SW-1:0] r [3];
  logic [SW-1:0] r_n [3];
  logic [6:0]    cnt;
  logic          busy;
  logic signed [9:0] d [3];
  logic [5:0]        len [3];

  always_comb begin
    e[0] = adc;
    for (int k = 1; k <= DMAX; k++) e[k] = hist[k-1];
    for (int i = 0; i < 3; i++) begin
      len[i] = (psa_len[i] == 0) ? 6'd1 : 6'(psa_len[i]);
      d[i]   = 10'(PSA_CAP + 1) - 10'($signed(psa_start[i])) - $signed({4'd0, len[i]});
      if (d[i] < 0) d[i] = '0;
      r_n[i] = r[i] + SW'(e[d[i]]) - SW'(e[d[i] + len[i]]);
    end
  end

  always_ff @(posedge clk) begin
    if (rst || !run) begin
      for (int k = 0; k < DMAX; k++) hist[k] <= '0;
      for (int i = 0; i < 3; i++) r[i] <= '0;
      sums  <= '0;
      valid <= 1'b0;
      busy  <= 1'b0;
      cnt   <= '0;
    end else begin
      hist[0] <= adc;
      for (int k = 1; k < DMAX; k++) hist[k] <= hist[k-1];
      for (int i = 0; i < 3; i++) r[i] <= r_n[i];
      valid <= 1'b0;
      if (trig && !busy) begin
        busy <= 1'b1;
        cnt  <= 7'd1;
      end else if (busy) begin
        cnt <= cnt + 7'd1;
        if (cnt == 7'(PSA_CAP)) begin
          for (int i = 0; i < 3; i++) sums[i] <= 32'(r[i]);
          valid <= 1'b1;
          busy  <= 1'b0;
        end
      end
    end
  end
endmodule
