// cfd_timing: constant fraction timing of the pulse arrival.
//
// From the fast filter output ff the constant fraction signal
//   c[n] = 256*ff[n-D] - w*ff[n]        (fraction w/256, delay D)
// is formed. It is negative on the rising edge and crosses zero when the
// delayed filter reaches the fraction w/256 of the current one, a point that
// does not depend on the pulse amplitude. After a trigger the module searches
// c from CFD_PRE samples before the trigger sample for CFD_WIN samples and,
// at the first sign change from negative to non-negative between samples m-1
// and m, interpolates linearly:
//   time = (m-1 - trigger sample) + (-c[m-1]) / (c[m] - c[m-1])
// The fraction is computed to 16 bits by a restoring divider (16 clocks).
//
// Outputs: cfd_int, the signed whole-sample part relative to the trigger
// sample, cfd_frac, the fraction in units of 1/65536, found (a crossing was
// seen) and done, a one-clock pulse at most CFD_PRE+CFD_WIN+18 clocks after
// trig. The paper states only that constant fraction timing is computed;
// the digital CFD form, search window and divider are this design's choices.
module cfd_timing
  import pnxl_pkg::*;
(
  input  logic               clk,
  input  logic               rst,
  input  logic               run,
  input  logic signed [23:0] ff,         // fast filter, one value per clock
  input  logic               trig,       // aligned with the ff value that crossed threshold
  input  logic [3:0]         cfd_delay,  // D, 1..15
  input  logic [7:0]         cfd_w,      // fraction w/256
  output logic signed [7:0]  cfd_int,
  output logic [15:0]        cfd_frac,
  output logic               found,
  output logic               done
);
  localparam int CW = 34;   // width of c
  localparam int HD = CFD_PRE + 2;

  typedef enum logic [1:0] {IDLE, SEARCH, DIVIDE} state_t;
  state_t state;

  logic signed [23:0] ffh [16];      // ffh[k] = ff k+1 clocks old
  logic signed [CW-1:0] c_now;
  logic signed [CW-1:0] ch [HD];     // ch[k] = c k+1 clocks old
  logic signed [CW-1:0] cur, prev;
  logic signed [23:0] ff_d;
  logic [6:0] j;
  logic [CW+1:0] rem, den;
  logic [CW+1:0] rem2;
  logic [4:0] bitn;

  always_comb begin
    ff_d  = (cfd_delay == 0) ? ff : ffh[cfd_delay - 4'd1];
    c_now = (CW'(ff_d) <<< 8) - CW'(ff) * CW'($signed({1'b0, cfd_w}));
    cur   = ch[CFD_PRE];
    prev  = ch[CFD_PRE + 1];
    rem2  = rem << 1;
  end

  always_ff @(posedge clk) begin
    if (rst || !run) begin
      for (int k = 0; k < 16; k++) ffh[k] <= '0;
      for (int k = 0; k < HD; k++) ch[k] <= '0;
      state <= IDLE;
      j <= '0; rem <= '0; den <= '0; bitn <= '0;
      cfd_int <= '0; cfd_frac <= '0; found <= 1'b0; done <= 1'b0;
    end else begin
      ffh[0] <= ff;
      for (int k = 1; k < 16; k++) ffh[k] <= ffh[k-1];
      ch[0] <= c_now;
      for (int k = 1; k < HD; k++) ch[k] <= ch[k-1];
      done <= 1'b0;
      case (state)
        IDLE: if (trig) begin
          state <= SEARCH;
          j     <= '0;
        end
        SEARCH: begin
          // cur = c(trigger - CFD_PRE + j), prev = the sample before it
          if (prev < 0 && cur >= 0) begin
            cfd_int  <= 8'(int'(j) - CFD_PRE - 1);
            found    <= 1'b1;
            rem      <= (CW+2)'(-prev);
            den      <= (CW+2)'(cur - prev);
            cfd_frac <= '0;
            bitn     <= '0;
            state    <= DIVIDE;
          end else if (j == 7'(CFD_WIN - 1)) begin
            cfd_int  <= '0;
            cfd_frac <= '0;
            found    <= 1'b0;
            done     <= 1'b1;
            state    <= IDLE;
          end
          j <= j + 7'd1;
        end
        DIVIDE: begin
          if (rem2 >= den) begin
            rem      <= rem2 - den;
            cfd_frac <= {cfd_frac[14:0], 1'b1};
          end else begin
            rem      <= rem2;
            cfd_frac <= {cfd_frac[14:0], 1'b0};
          end
          bitn <= bitn + 5'd1;
          if (bitn == 5'd15) begin
            done  <= 1'b1;
            state <= IDLE;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
