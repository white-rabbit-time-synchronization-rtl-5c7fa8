// pnxl_fpga_top: the pulse-processing firmware of one Kintex 7 FPGA of the
// Pixie-Net XL, without the White Rabbit core.
//
// Data flow: NCH channel processors turn the ADC streams into event records
// (energy, time stamps, constant fraction time, short sums, waveform). An
// arbiter funnels the records into the deep output buffer (the SDRAM FIFO).
// The flow gate takes records from the buffer either free flowing or, under
// control of the Zynq processor, only when their White Rabbit time lies in an
// acceptance range, discarding older ones; accepted records are wrapped into
// UDP packets for the White Rabbit core's user-data port, or, in diagnostic
// mode, read by the Zynq over the slow control bus. As each record enters
// the buffer its metadata (channel, energy, local time, White Rabbit time) is
// queued for the Zynq, which forwards it to the decision maker. Pulse heights
// also go to the Zynq over a 4-bit link for MCA histograms.
//
// External parts appear as ports: ADC samples from the daughter card,
// White Rabbit date/time from the WR core (40-bit seconds, 28-bit cycles),
// the Zynq control bus, the frame stream to the WR core and the MCA link.
// Everything runs on one 125 MHz clock, the WR-disciplined main clock, with
// ADC samples taken as synchronous to it; that single clock domain and the
// buffer being an on-chip array rather than an SDRAM controller are this
// design's simplifications.
module pnxl_fpga_top
  import pnxl_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH  = 2 ** 27,  // 32-bit words: 4 Gbit
  parameter int unsigned META_DEPTH  = 1024,
  parameter int unsigned TRACE_DEPTH = 256
) (
  input  logic                       clk,
  input  logic                       rst,
  // ADC daughter card
  input  logic [NCH-1:0][ADC_W-1:0]  adc,
  // White Rabbit core: time
  input  wr_time_t                   wr_time,
  // slow control bus from the Zynq
  input  logic [11:0]                bus_addr,
  input  logic                       bus_wr,
  input  logic                       bus_rd,
  input  logic [31:0]                bus_wdata,
  output logic [31:0]                bus_rdata,
  // White Rabbit core: user-data frames
  output logic                       tx_valid,
  input  logic                       tx_ready,
  output logic [15:0]                tx_data,
  output logic                       tx_sof,
  output logic                       tx_eof,
  // 4-bit MCA link to the Zynq
  output logic [3:0]                 mca_data,
  output logic                       mca_valid,
  output logic                       mca_first
);
  localparam int unsigned MW = $bits(meta_t);

  logic run, gated, diag, acc_valid;
  logic [7:0] module_id;
  chan_cfg_t [NCH-1:0] cfg;
  logic [31:0] acc_lo, acc_hi, src_ip, dst_ip;
  logic [47:0] src_mac, dst_mac;
  logic [15:0] src_port, dst_port;

  logic [NCH-1:0]        c_valid, c_ready, c_last, c_done;
  logic [NCH-1:0][31:0]  c_data;
  logic [NCH-1:0][15:0]  c_energy;
  logic [NCH-1:0][47:0]  real_time, live_time;
  logic [NCH-1:0][31:0]  in_count, out_count;

  logic        f_valid, f_ready, f_last;
  logic [31:0] f_data;
  logic        q_full, q_empty, q_rd, g_ready;
  logic [31:0] q_dout;
  logic [$clog2(FIFO_DEPTH):0] q_count;

  logic        e_valid, e_ready, e_last, d_valid, d_ready, d_last, waiting;
  logic [31:0] e_data, d_data, n_fwd, n_disc, n_mca_drop;
  logic [15:0] n_frames;

  meta_t       meta_in, meta_out;
  logic        m_push, m_full, m_empty, m_pop;
  logic [31:0] n_meta_drop;
  logic [2:0]  f_widx;

  ctrl_io #(.N(NCH)) u_ctrl (
    .clk, .rst, .bus_addr, .bus_wr, .bus_rd, .bus_wdata, .bus_rdata,
    .run, .gated, .diag, .module_id, .cfg, .acc_valid, .acc_lo, .acc_hi,
    .dst_mac, .src_mac, .src_ip, .dst_ip, .src_port, .dst_port,
    .wr_time, .fifo_empty(q_empty), .fifo_count(32'(q_count)), .gate_waiting(waiting),
    .real_time, .live_time, .in_count, .out_count,
    .counters({32'(n_frames), n_meta_drop, n_mca_drop, n_disc, n_fwd}),
    .meta_empty(m_empty), .meta(meta_out), .meta_pop(m_pop),
    .dia_valid(d_valid), .dia_data(d_data), .dia_last(d_last), .dia_ready(d_ready));

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    channel_proc #(.CH(4'(c)), .TRACE_DEPTH(TRACE_DEPTH)) u_ch (
      .clk, .rst, .run, .adc(adc[c]), .cfg(cfg[c]), .module_id, .wr_time,
      .rec_valid(c_valid[c]), .rec_ready(c_ready[c]), .rec_data(c_data[c]), .rec_last(c_last[c]),
      .ev_done(c_done[c]), .ev_energy(c_energy[c]),
      .real_time(real_time[c]), .live_time(live_time[c]),
      .in_count(in_count[c]), .out_count(out_count[c]));
  end

  event_funnel #(.N(NCH)) u_funnel (
    .clk, .rst, .in_valid(c_valid), .in_ready(c_ready), .in_data(c_data), .in_last(c_last),
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_data), .out_last(f_last));

  assign f_ready = !q_full;

  sync_fifo #(.W(32), .DEPTH(FIFO_DEPTH)) u_buffer (
    .clk, .rst, .wr_en(f_valid && f_ready), .din(f_data), .full(q_full),
    .rd_en(q_rd), .dout(q_dout), .empty(q_empty), .count(q_count));

  // metadata of each record, picked from header words 0..3 as it enters the buffer
  always_ff @(posedge clk) begin
    if (rst) begin
      f_widx <= '0; meta_in <= '0; m_push <= 1'b0; n_meta_drop <= '0;
    end else begin
      m_push <= 1'b0;
      if (m_push && m_full) n_meta_drop <= n_meta_drop + 32'd1;
      if (f_valid && f_ready) begin
        f_widx <= f_last ? 3'd0 : ((f_widx == 3'd7) ? 3'd7 : f_widx + 3'd1);
        unique case (f_widx)
          3'd0: meta_in.channel <= f_data[27:24];
          3'd1: meta_in.local_ts[31:0] <= f_data;
          3'd2: begin meta_in.local_ts[47:32] <= f_data[31:16]; meta_in.energy <= f_data[15:0]; end
          3'd3: begin meta_in.wr_word <= f_data; m_push <= 1'b1; end
          default: ;
        endcase
      end
    end
  end

  sync_fifo #(.W(MW), .DEPTH(META_DEPTH)) u_meta (
    .clk, .rst, .wr_en(m_push && !m_full), .din(meta_in), .full(m_full),
    .rd_en(m_pop), .dout(meta_out), .empty(m_empty), .count());

  assign q_rd = g_ready && !q_empty;

  flow_gate u_gate (
    .clk, .rst, .gated, .diag, .acc_valid, .acc_lo, .acc_hi,
    .in_valid(!q_empty), .in_ready(g_ready), .in_data(q_dout),
    .eth_valid(e_valid), .eth_ready(e_ready), .eth_data(e_data), .eth_last(e_last),
    .dia_valid(d_valid), .dia_ready(d_ready), .dia_data(d_data), .dia_last(d_last),
    .waiting, .n_forwarded(n_fwd), .n_discarded(n_disc));

  udp_packager u_udp (
    .clk, .rst, .src_mac, .dst_mac, .src_ip, .dst_ip, .src_port, .dst_port,
    .in_valid(e_valid), .in_ready(e_ready), .in_data(e_data), .in_last(e_last),
    .tx_valid, .tx_ready, .tx_data, .tx_sof, .tx_eof, .n_frames);

  mca_link #(.N(NCH)) u_mca (
    .clk, .rst, .ev_valid(c_done), .ev_energy(c_energy),
    .mca_data, .mca_valid, .mca_first, .n_dropped(n_mca_drop));
endmodule
