// ctrl_io: slave of the slow control bus from the Zynq processor.
//
// It holds the pulse-processing parameters of every channel and the module
// controls, and makes status, run statistics, the White Rabbit date/time,
// the per-event metadata and, in diagnostic mode, the event records
// themselves readable. The bus is a simple synchronous single-word bus:
// bus_wr writes bus_wdata to bus_addr, bus_rd returns the addressed register
// on bus_rdata one clock later. Reads of the two queue ports (metadata word 3,
// diagnostic data) remove the word they return.
//
// Register map (32-bit word addresses):
//   0x000 CTRL       rw  [0] run, [1] gated (processor-directed flow), [2] diag
//   0x001 MODULE_ID  rw  [7:0]
//   0x002 STATUS     r   [0] output buffer empty, [1] metadata empty,
//                        [2] gate waiting for a range, [3] range valid
//   0x003 FIFO_COUNT r   words in the output buffer
//   0x004 WR_SEC     r   TAI seconds [31:0]; reading it snapshots the 68-bit time
//   0x005 WR_SEC_HI  r   snapshot TAI seconds [39:32]
//   0x006 WR_CYC     r   snapshot 8 ns cycles [27:0]
//   0x008 ACC_LO     rw  acceptance range start (White Rabbit time word)
//   0x009 ACC_HI     rw  acceptance range end; writing it makes the range valid
//   0x00A ACC_CTRL   r: [0] range valid; w: invalidate the range
//   0x010..0x016     destination MAC [47:32], [31:0], source MAC [47:32], [31:0],
//                    source IP, destination IP, {source port, destination port}
//   0x018..0x01B META  r  {channel[19:16], energy[15:0]}, local ts [31:0],
//                    local ts [47:32], WR time word (this read pops the entry)
//   0x01C DIAG_DATA  r   next diagnostic record word (popped)
//   0x01D DIAG_STAT  r   [0] a word is available, [1] it is a record's last word
//   0x020..0x024     forwarded records, discarded records, dropped MCA energies,
//                    dropped metadata entries, UDP frames sent
//   0x100 + 0x40*ch  per channel: +0x00 enable, +0x01 fast_len, +0x02 fast_gap,
//                    +0x03 threshold, +0x04 slow_len, +0x05 slow_gap, +0x06 c0,
//                    +0x07 cg, +0x08 c1, +0x09 baseline, +0x0A..0x0C psa_start,
//                    +0x0D..0x0F psa_len, +0x10 cfd_delay, +0x11 cfd_w,
//                    +0x12 trace_pre (all rw); +0x20/0x21 real time, +0x22/0x23
//                    live time, +0x24 input counts, +0x25 output counts (r)
//
// The paper says the bus defines the parameter registers, makes captured data
// readable in diagnostic mode and exposes the 68-bit White Rabbit time; the
// bus protocol, map and reset values are this design's choices.
module ctrl_io
  import pnxl_pkg::*;
#(
  parameter int unsigned N = NCH
) (
  input  logic               clk,
  input  logic               rst,
  // bus
  input  logic [11:0]        bus_addr,
  input  logic               bus_wr,
  input  logic               bus_rd,
  input  logic [31:0]        bus_wdata,
  output logic [31:0]        bus_rdata,
  // controls
  output logic               run,
  output logic               gated,
  output logic               diag,
  output logic [7:0]         module_id,
  output chan_cfg_t [N-1:0]  cfg,
  output logic               acc_valid,
  output logic [31:0]        acc_lo,
  output logic [31:0]        acc_hi,
  output logic [47:0]        dst_mac,
  output logic [47:0]        src_mac,
  output logic [31:0]        src_ip,
  output logic [31:0]        dst_ip,
  output logic [15:0]        src_port,
  output logic [15:0]        dst_port,
  // status and statistics
  input  wr_time_t           wr_time,
  input  logic               fifo_empty,
  input  logic [31:0]        fifo_count,
  input  logic               gate_waiting,
  input  logic [N-1:0][47:0] real_time,
  input  logic [N-1:0][47:0] live_time,
  input  logic [N-1:0][31:0] in_count,
  input  logic [N-1:0][31:0] out_count,
  input  logic [4:0][31:0]   counters,
  // metadata queue
  input  logic               meta_empty,
  input  meta_t              meta,
  output logic               meta_pop,
  // diagnostic record stream
  input  logic               dia_valid,
  input  logic [31:0]        dia_data,
  input  logic               dia_last,
  output logic               dia_ready
);
  wr_time_t snap;
  logic [3:0] a_ch;
  logic [5:0] a_reg;
  logic       a_is_ch;

  assign a_is_ch = bus_addr[11:8] != 4'd0;
  assign a_ch    = 4'((bus_addr - 12'h100) >> 6);
  assign a_reg   = bus_addr[5:0];

  assign meta_pop  = bus_rd && (bus_addr == 12'h01B) && !meta_empty;
  assign dia_ready = bus_rd && (bus_addr == 12'h01C);

  function automatic chan_cfg_t cfg_default();
    chan_cfg_t c;
    c.enable    = 1'b0;
    c.fast_len  = 5'd4;
    c.fast_gap  = 5'd2;
    c.threshold = 16'd200;
    c.slow_len  = 7'd32;
    c.slow_gap  = 6'd8;
    c.c0        = -32'sd33554432;   // -2^30/32: plain trapezoid (S1 - S0)/L
    c.cg        = 32'sd0;
    c.c1        = 32'sd33554432;
    c.baseline  = 16'd0;
    c.psa_start = {8'd8, 8'd0, -8'sd8};
    c.psa_len   = {5'd16, 5'd8, 5'd8};
    c.cfd_delay = 4'd2;
    c.cfd_w     = 8'd128;
    c.trace_pre = 6'd16;
    return c;
  endfunction

  // writes
  always_ff @(posedge clk) begin
    if (rst) begin
      run <= 1'b0; gated <= 1'b0; diag <= 1'b0; module_id <= '0;
      acc_valid <= 1'b0; acc_lo <= '0; acc_hi <= '0;
      dst_mac <= 48'hFFFF_FFFF_FFFF; src_mac <= 48'h02_00_00_00_00_01;
      src_ip <= 32'hC0A8_0164; dst_ip <= 32'hC0A8_0101;
      src_port <= 16'd61001; dst_port <= 16'd61001;
      for (int c = 0; c < int'(N); c++) cfg[c] <= cfg_default();
    end else if (bus_wr) begin
      if (a_is_ch) begin
        for (int c = 0; c < int'(N); c++) begin
          if (a_ch == 4'(c)) begin
            unique case (a_reg)
              6'h00: cfg[c].enable    <= bus_wdata[0];
              6'h01: cfg[c].fast_len  <= bus_wdata[4:0];
              6'h02: cfg[c].fast_gap  <= bus_wdata[4:0];
              6'h03: cfg[c].threshold <= bus_wdata[15:0];
              6'h04: cfg[c].slow_len  <= bus_wdata[6:0];
              6'h05: cfg[c].slow_gap  <= bus_wdata[5:0];
              6'h06: cfg[c].c0        <= bus_wdata;
              6'h07: cfg[c].cg        <= bus_wdata;
              6'h08: cfg[c].c1        <= bus_wdata;
              6'h09: cfg[c].baseline  <= bus_wdata[15:0];
              6'h0A: cfg[c].psa_start[0] <= bus_wdata[7:0];
              6'h0B: cfg[c].psa_start[1] <= bus_wdata[7:0];
              6'h0C: cfg[c].psa_start[2] <= bus_wdata[7:0];
              6'h0D: cfg[c].psa_len[0] <= bus_wdata[4:0];
              6'h0E: cfg[c].psa_len[1] <= bus_wdata[4:0];
              6'h0F: cfg[c].psa_len[2] <= bus_wdata[4:0];
              6'h10: cfg[c].cfd_delay <= bus_wdata[3:0];
              6'h11: cfg[c].cfd_w     <= bus_wdata[7:0];
              6'h12: cfg[c].trace_pre <= bus_wdata[5:0];
              default: ;
            endcase
          end
        end
      end else begin
        unique case (bus_addr)
          12'h000: {diag, gated, run} <= bus_wdata[2:0];
          12'h001: module_id <= bus_wdata[7:0];
          12'h008: acc_lo <= bus_wdata;
          12'h009: begin acc_hi <= bus_wdata; acc_valid <= 1'b1; end
          12'h00A: acc_valid <= 1'b0;
          12'h010: dst_mac[47:32] <= bus_wdata[15:0];
          12'h011: dst_mac[31:0]  <= bus_wdata;
          12'h012: src_mac[47:32] <= bus_wdata[15:0];
          12'h013: src_mac[31:0]  <= bus_wdata;
          12'h014: src_ip <= bus_wdata;
          12'h015: dst_ip <= bus_wdata;
          12'h016: {src_port, dst_port} <= bus_wdata;
          default: ;
        endcase
      end
    end
  end

  // reads
  always_ff @(posedge clk) begin
    if (rst) begin
      bus_rdata <= '0;
      snap      <= '0;
    end else if (bus_rd) begin
      bus_rdata <= '0;
      if (a_is_ch) begin
        for (int c = 0; c < int'(N); c++) begin
          if (a_ch == 4'(c)) begin
            unique case (a_reg)
              6'h00: bus_rdata <= 32'(cfg[c].enable);
              6'h01: bus_rdata <= 32'(cfg[c].fast_len);
              6'h02: bus_rdata <= 32'(cfg[c].fast_gap);
              6'h03: bus_rdata <= 32'(cfg[c].threshold);
              6'h04: bus_rdata <= 32'(cfg[c].slow_len);
              6'h05: bus_rdata <= 32'(cfg[c].slow_gap);
              6'h06: bus_rdata <= cfg[c].c0;
              6'h07: bus_rdata <= cfg[c].cg;
              6'h08: bus_rdata <= cfg[c].c1;
              6'h09: bus_rdata <= 32'(cfg[c].baseline);
              6'h0A: bus_rdata <= 32'(cfg[c].psa_start[0]);
              6'h0B: bus_rdata <= 32'(cfg[c].psa_start[1]);
              6'h0C: bus_rdata <= 32'(cfg[c].psa_start[2]);
              6'h0D: bus_rdata <= 32'(cfg[c].psa_len[0]);
              6'h0E: bus_rdata <= 32'(cfg[c].psa_len[1]);
              6'h0F: bus_rdata <= 32'(cfg[c].psa_len[2]);
              6'h10: bus_rdata <= 32'(cfg[c].cfd_delay);
              6'h11: bus_rdata <= 32'(cfg[c].cfd_w);
              6'h12: bus_rdata <= 32'(cfg[c].trace_pre);
              6'h20: bus_rdata <= real_time[c][31:0];
              6'h21: bus_rdata <= 32'(real_time[c][47:32]);
              6'h22: bus_rdata <= live_time[c][31:0];
              6'h23: bus_rdata <= 32'(live_time[c][47:32]);
              6'h24: bus_rdata <= in_count[c];
              6'h25: bus_rdata <= out_count[c];
              default: ;
            endcase
          end
        end
      end else begin
        unique case (bus_addr)
          12'h000: bus_rdata <= {29'd0, diag, gated, run};
          12'h001: bus_rdata <= 32'(module_id);
          12'h002: bus_rdata <= {28'd0, acc_valid, gate_waiting, meta_empty, fifo_empty};
          12'h003: bus_rdata <= fifo_count;
          12'h004: begin bus_rdata <= wr_time.tai_sec[31:0]; snap <= wr_time; end
          12'h005: bus_rdata <= 32'(snap.tai_sec[39:32]);
          12'h006: bus_rdata <= 32'(snap.cycles);
          12'h008: bus_rdata <= acc_lo;
          12'h009: bus_rdata <= acc_hi;
          12'h00A: bus_rdata <= 32'(acc_valid);
          12'h010: bus_rdata <= 32'(dst_mac[47:32]);
          12'h011: bus_rdata <= dst_mac[31:0];
          12'h012: bus_rdata <= 32'(src_mac[47:32]);
          12'h013: bus_rdata <= src_mac[31:0];
          12'h014: bus_rdata <= src_ip;
          12'h015: bus_rdata <= dst_ip;
          12'h016: bus_rdata <= {src_port, dst_port};
          12'h018: bus_rdata <= {12'd0, meta.channel, meta.energy};
          12'h019: bus_rdata <= meta.local_ts[31:0];
          12'h01A: bus_rdata <= 32'(meta.local_ts[47:32]);
          12'h01B: bus_rdata <= meta.wr_word;
          12'h01C: bus_rdata <= dia_valid ? dia_data : 32'd0;
          12'h01D: bus_rdata <= {30'd0, dia_last, dia_valid};
          12'h020: bus_rdata <= counters[0];
          12'h021: bus_rdata <= counters[1];
          12'h022: bus_rdata <= counters[2];
          12'h023: bus_rdata <= counters[3];
          12'h024: bus_rdata <= counters[4];
          default: ;
        endcase
      end
    end
  end
endmodule
