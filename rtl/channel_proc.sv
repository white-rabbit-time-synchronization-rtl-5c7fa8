// channel_proc: pulse processing of one ADC channel.
//
// The fast trigger watches the ADC stream. When it fires while the channel is
// idle and enabled, the trigger is taken: the time stamps are latched and the
// energy sums, short sums, constant fraction timing and waveform capture all
// start from that same trigger sample. The channel is then busy until every
// result is in and the event record (see pnxl_pkg for its layout) has been
// sent on the record stream; triggers during that time are counted as input
// counts but not recorded (dead time). After the last word is accepted the
// channel emits a one-clock ev_done with the event's energy.
//
// Record stream: rec_valid/rec_ready handshake, 32-bit words, rec_last on the
// final word; words are held while rec_ready is low, so a full output buffer
// stalls the channel and extends its dead time.
// The paper lists the sub modules; their combination, the busy/dead-time
// rule and the record format are this design's choices.
module channel_proc
  import pnxl_pkg::*;
#(
  parameter logic [3:0] CH = 4'd0,
  parameter int unsigned TRACE_DEPTH = 256
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         run,
  input  logic [ADC_W-1:0] adc,
  input  chan_cfg_t    cfg,
  input  logic [7:0]   module_id,
  input  wr_time_t     wr_time,
  // record stream
  output logic         rec_valid,
  input  logic         rec_ready,
  output logic [31:0]  rec_data,
  output logic         rec_last,
  // per-event summary
  output logic         ev_done,
  output logic [15:0]  ev_energy,
  // statistics
  output logic [47:0]  real_time,
  output logic [47:0]  live_time,
  output logic [31:0]  in_count,
  output logic [31:0]  out_count
);
  localparam int unsigned SW = ADC_W + 7;

  typedef enum logic [1:0] {IDLE, COLLECT, SEND} state_t;
  state_t state;

  logic signed [23:0] ff;
  logic trig_raw, take;
  logic [SW-1:0] s0, sg, s1;
  logic sums_valid, e_valid, psa_valid, cfd_done, cfd_found, trace_done;
  logic [15:0] e_val, energy;
  logic [2:0][31:0] psa, psa_q;
  logic signed [7:0] cfd_int;
  logic [15:0] cfd_frac;
  logic [47:0] local_ts;
  logic [31:0] wr_word;
  logic have_e, have_psa, have_cfd, cfd_ok;
  logic signed [7:0] cfd_int_q;
  logic [15:0] cfd_frac_q;
  logic [6:0] widx;
  logic [$clog2(TRACE_LEN)-1:0] pair;
  logic [2*ADC_W-1:0] tpair;
  logic trace_clear;

  assign take = trig_raw && cfg.enable && (state == IDLE);

  fast_trigger u_trig (
    .clk, .rst, .run, .adc,
    .fast_len(cfg.fast_len), .fast_gap(cfg.fast_gap), .threshold(cfg.threshold),
    .ff, .trig(trig_raw));

  energy_sums u_esum (
    .clk, .rst, .run, .adc, .slow_len(cfg.slow_len), .slow_gap(cfg.slow_gap),
    .trig(take), .s0, .sg, .s1, .valid(sums_valid));

  energy_recon u_erec (
    .clk, .rst, .in_valid(sums_valid), .s0, .sg, .s1,
    .slow_len(cfg.slow_len), .slow_gap(cfg.slow_gap), .baseline(cfg.baseline),
    .c0(cfg.c0), .cg(cfg.cg), .c1(cfg.c1), .energy(e_val), .valid(e_valid));

  psa_sums u_psa (
    .clk, .rst, .run, .adc, .trig(take),
    .psa_start(cfg.psa_start), .psa_len(cfg.psa_len), .sums(psa), .valid(psa_valid));

  cfd_timing u_cfd (
    .clk, .rst, .run, .ff, .trig(take), .cfd_delay(cfg.cfd_delay), .cfd_w(cfg.cfd_w),
    .cfd_int, .cfd_frac, .found(cfd_found), .done(cfd_done));

  trace_capture #(.DEPTH(TRACE_DEPTH), .TLEN(TRACE_LEN)) u_trace (
    .clk, .rst, .run, .adc, .trig(take), .clear(trace_clear), .trace_pre(cfg.trace_pre),
    .done(trace_done), .rd_pair(pair), .rd_data(tpair));

  timestamp_latch u_ts (
    .clk, .rst, .run, .trig(take), .wr_time, .local_now(), .local_ts, .wr_ts(), .wr_word);

  run_stats u_stats (
    .clk, .rst, .run, .busy(state != IDLE), .trig_in(trig_raw && cfg.enable),
    .event_out(ev_done), .real_time, .live_time, .in_count, .out_count);

  // record words
  assign pair = ($clog2(TRACE_LEN))'((widx >= 7'(HDR_WORDS)) ? widx - 7'(HDR_WORDS) : 7'd0);
  always_comb begin
    unique case (widx)
      7'd0: rec_data = {4'(HDR_WORDS), CH, module_id, 16'(REC_WORDS)};
      7'd1: rec_data = local_ts[31:0];
      7'd2: rec_data = {local_ts[47:32], energy};
      7'd3: rec_data = wr_word;
      7'd4: rec_data = {cfd_frac_q, cfd_int_q, 7'd0, cfd_ok};
      7'd5: rec_data = psa_q[0];
      7'd6: rec_data = psa_q[1];
      7'd7: rec_data = psa_q[2];
      default: rec_data = {16'(tpair[2*ADC_W-1:ADC_W]), 16'(tpair[ADC_W-1:0])};
    endcase
  end
  assign rec_valid = (state == SEND);
  assign rec_last  = (widx == 7'(REC_WORDS - 1));
  assign trace_clear = (state == SEND) && rec_ready && rec_last;

  assign ev_energy = energy;

  always_ff @(posedge clk) begin
    if (rst || !run) begin
      state <= IDLE;
      have_e <= 1'b0; have_psa <= 1'b0; have_cfd <= 1'b0;
      energy <= '0; psa_q <= '0; cfd_int_q <= '0; cfd_frac_q <= '0; cfd_ok <= 1'b0;
      widx <= '0;
      ev_done <= 1'b0;
    end else begin
      ev_done <= 1'b0;
      if (e_valid)   begin energy <= e_val; have_e <= 1'b1; end
      if (psa_valid) begin psa_q <= psa; have_psa <= 1'b1; end
      if (cfd_done)  begin
        cfd_int_q <= cfd_int; cfd_frac_q <= cfd_frac; cfd_ok <= cfd_found; have_cfd <= 1'b1;
      end
      unique case (state)
        IDLE: if (take) begin
          state <= COLLECT;
          have_e <= 1'b0; have_psa <= 1'b0; have_cfd <= 1'b0;
        end
        COLLECT: if (have_e && have_psa && have_cfd && trace_done) begin
          state <= SEND;
          widx  <= '0;
        end
        SEND: if (rec_ready) begin
          if (rec_last) begin
            state   <= IDLE;
            ev_done <= 1'b1;
          end
          widx <= widx + 7'd1;
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
