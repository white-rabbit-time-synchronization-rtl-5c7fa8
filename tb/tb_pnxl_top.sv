// tb_pnxl_top: end-to-end test of the FPGA top level with a small output
// buffer. The Zynq side is played through the control bus: channels are
// configured and started, then the test walks through the operating modes
// and counts every mechanism it sees work:
//   free-flowing UDP frames (headers, record contents, energies per channel),
//   MCA energies on the 4-bit link, metadata read by the processor,
//   White Rabbit time read over the bus, processor-directed flow (records
//   before the acceptance range discarded, inside forwarded, after it held
//   back until a new range arrives), diagnostic record readout over the bus,
//   and output-buffer back-pressure turning into channel dead time, with the
//   run statistics and counters read back at the end. Any mechanism that
//   never happened counts as a failure.
module tb_pnxl_top;
  import pnxl_pkg::*;
  localparam int PW = 200;              // rectangular pulse width, samples
  logic clk = 0, rst = 1;
  logic [NCH-1:0][ADC_W-1:0] adc;
  wr_time_t wrt;
  logic [11:0] bus_addr = '0;
  logic bus_wr = 0, bus_rd = 0;
  logic [31:0] bus_wdata = '0, bus_rdata;
  logic tx_valid, tx_ready, tx_sof, tx_eof;
  logic [15:0] tx_data;
  logic [3:0] mca_data;
  logic mca_valid, mca_first;
  int checks = 0, failures = 0;
  longint now = 0;
  longint pstart [NCH];
  bit tx_en = 1;
  int n_frames_seen = 0, n_mca = 0, n_meta = 0, n_wr = 0, n_disc = 0, n_fwd_gated = 0,
      n_wait = 0, n_diag = 0, n_full = 0, n_dead = 0, n_stats = 0;
  int frames_ch [NCH];
  logic [15:0] fr [$];
  logic [19:0] mca_word;
  int mca_left = 0;

  pnxl_fpga_top #(.FIFO_DEPTH(256), .META_DEPTH(8)) dut (
    .clk, .rst, .adc, .wr_time(wrt), .bus_addr, .bus_wr, .bus_rd, .bus_wdata, .bus_rdata,
    .tx_valid, .tx_ready, .tx_data, .tx_sof, .tx_eof, .mca_data, .mca_valid, .mca_first);

  always #4 clk = ~clk;

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int amp(int ch);
    return 800 + 300 * ch;
  endfunction

  function automatic bit near(int v, int e);
    return v >= e - 2 && v <= e + 2;
  endfunction

  // ADC samples and White Rabbit time, advanced just after each clock edge
  always @(posedge clk) begin
    #1;
    now++;
    wrt.cycles = 28'(now % 125_000_000);
    wrt.tai_sec = 40'd1_700_000_000 + 40'(now / 125_000_000);
    for (int c = 0; c < NCH; c++)
      adc[c] = (now >= pstart[c] && now < pstart[c] + PW) ? ADC_W'(amp(c)) : '0;
    if (dut.q_full) n_full++;
  end

  // frame sink and MCA decoder
  always begin
    logic hv, hs, he, mv, mf;
    logic [15:0] hd;
    logic [3:0] md;
    @(negedge clk);
    tx_ready = tx_en && ($urandom_range(0, 3) != 0);
    #1;
    hv = tx_valid && tx_ready; hs = tx_sof; he = tx_eof; hd = tx_data;
    mv = mca_valid; mf = mca_first; md = mca_data;
    if (hv) begin
      if (hs) fr.delete();
      fr.push_back(hd);
      if (he) check_frame();
    end
    if (mv) begin
      if (mf) begin mca_word = {md, 16'd0}; mca_left = 4; end
      else if (mca_left > 0) begin
        mca_left--;
        mca_word[4 * mca_left +: 4] = md;
        if (mca_left == 0) begin
          checks++; n_mca++;
          if (mca_word[19:16] >= NCH || !near(int'(mca_word[15:0]), amp(int'(mca_word[19:16])))) begin
            failures++; $display("mca word %h", mca_word);
          end
        end
      end
    end
    @(posedge clk);
  end

  task automatic check_frame();
    logic [31:0] w [REC_WORDS];
    int ch;
    checks++;
    if (fr.size() != 21 + 2 * REC_WORDS || fr[6] !== 16'h0800 || fr[7] !== 16'h4500 ||
        fr[8] !== 16'(20 + 8 + 4 * REC_WORDS)) begin
      failures++; $display("frame size %0d type %h", fr.size(), fr[6]); return;
    end
    for (int k = 0; k < REC_WORDS; k++) w[k] = {fr[21 + 2 * k], fr[22 + 2 * k]};
    ch = int'(w[0][27:24]);
    checks++;
    if (w[0][31:28] != 4'd8 || ch >= NCH || w[0][23:16] != 8'h3C || w[0][15:0] != 16'(REC_WORDS) ||
        !near(int'(w[2][15:0]), amp(ch)) || w[4][0] !== 1'b1) begin
      failures++; $display("frame record w0 %h w2 %h w4 %h", w[0], w[2], w[4]); return;
    end
    // waveform: trace_pre samples of zero before the step, the amplitude after
    checks++;
    if (w[8 + 8 - 1] !== 32'd0 || w[8 + 8] !== {16'(amp(ch)), 16'(amp(ch))}) begin
      failures++; $display("frame trace %h %h", w[15], w[16]);
    end
    frames_ch[ch]++;
    n_frames_seen++;
  endtask

  task automatic bus_write(logic [11:0] a, logic [31:0] d);
    @(negedge clk);
    bus_addr = a; bus_wdata = d; bus_wr = 1;
    @(negedge clk);
    bus_wr = 0;
  endtask

  task automatic bus_read(logic [11:0] a, output logic [31:0] d);
    @(negedge clk);
    bus_addr = a; bus_rd = 1;
    @(negedge clk);
    bus_rd = 0;
    d = bus_rdata;
  endtask

  task automatic fire(int ch);
    pstart[ch] = now + 2;
  endtask

  task automatic idle(int n);
    repeat (n) @(negedge clk);
  endtask

  // local time stamp and White Rabbit word must keep a fixed offset
  longint wr_off = -1;
  function automatic bit wr_consistent(logic [31:0] lts, logic [31:0] wrw);
    longint o;
    o = 2 * longint'(wrw[26:0]) - longint'(lts);
    if (wr_off < 0) wr_off = o;
    return (o >= wr_off - 1) && (o <= wr_off + 1);
  endfunction

  // read every metadata entry and check it
  task automatic read_meta(output int cnt, output logic [31:0] wrw [$]);
    logic [31:0] st, m0, m1, m2, m3;
    cnt = 0;
    wrw.delete();
    forever begin
      bus_read(12'h002, st);
      if (st[1]) break;
      bus_read(12'h018, m0); bus_read(12'h019, m1); bus_read(12'h01A, m2); bus_read(12'h01B, m3);
      checks++; cnt++; n_meta++;
      if (m0[19:16] >= NCH || !near(int'(m0[15:0]), amp(int'(m0[19:16]))) ||
          !wr_consistent(m1, m3)) begin
        failures++; $display("meta %h %h %h %h", m0, m1, m2, m3);
      end
      wrw.push_back(m3);
    end
  endtask

  initial begin
    logic [31:0] d, d2, st;
    logic [31:0] wrw [$];
    int cnt, sum_out, sum_in;
    foreach (pstart[c]) pstart[c] = -1000;
    adc = '0; wrt = '0;
    repeat (4) @(negedge clk);
    rst = 0;
    // configuration
    bus_write(12'h001, 32'h3C);
    for (int c = 0; c < NCH; c++) begin
      bus_write(12'(12'h100 + 64 * c), 32'd1);           // enable
      bus_write(12'(12'h100 + 64 * c + 3), 32'd300);     // threshold
      bus_write(12'(12'h100 + 64 * c + 18), 32'd16);     // trace_pre
    end
    bus_read(12'h103, d);
    checks++; if (d != 32'd300) begin failures++; $display("readback %0d", d); end
    bus_write(12'h000, 32'h1);                           // run, free flowing
    idle(50);

    // White Rabbit time read over the bus
    bus_read(12'h004, d);
    bus_read(12'h006, d2);
    checks++;
    if (d != wrt.tai_sec[31:0] || d2 > wrt.cycles || d2 + 10 < wrt.cycles) begin
      failures++; $display("wr read %0d %0d", d, d2);
    end else n_wr++;

    // phase 1: free-flowing UDP frames from every channel
    for (int r = 0; r < 2; r++) begin
      for (int c = 0; c < NCH; c++) begin fire(c); idle(37); end
      idle(600);
    end
    idle(1500);
    checks++;
    if (n_frames_seen != 2 * NCH) begin failures++; $display("phase 1 frames %0d", n_frames_seen); end
    foreach (frames_ch[c]) begin
      checks++; if (frames_ch[c] != 2) begin failures++; $display("ch %0d frames %0d", c, frames_ch[c]); end
    end
    read_meta(cnt, wrw);
    checks++; if (cnt != 2 * NCH) begin failures++; $display("meta entries %0d", cnt); end
    checks++; if (n_mca != 2 * NCH) begin failures++; $display("mca %0d", n_mca); end

    // phase 2: processor-directed flow
    bus_write(12'h000, 32'h3);
    for (int r = 0; r < 3; r++) begin fire(0); idle(600); end
    idle(300);
    bus_read(12'h002, st);
    checks++; if (!st[2]) begin failures++; $display("gate not waiting without a range"); end
    read_meta(cnt, wrw);
    checks++;
    if (cnt != 3) begin failures++; $display("gated meta %0d", cnt); end
    else begin
      bus_write(12'h008, wrw[1]); bus_write(12'h009, wrw[1]);
      idle(800);
      bus_read(12'h021, d);
      checks++; if (d != 1) begin failures++; $display("discarded %0d", d); end else n_disc++;
      checks++; if (n_frames_seen != 2 * NCH + 1) begin failures++; $display("gated fwd %0d", n_frames_seen); end
      else n_fwd_gated++;
      bus_read(12'h002, st);
      checks++; if (!st[2]) begin failures++; $display("later record not held"); end else n_wait++;
      bus_write(12'h008, wrw[2]); bus_write(12'h009, wrw[2]);
      idle(800);
      checks++; if (n_frames_seen != 2 * NCH + 2) begin failures++; $display("held record not sent"); end
      else n_fwd_gated++;
    end

    // phase 3: diagnostic readout over the bus
    bus_write(12'h00A, 32'd0);
    bus_write(12'h000, 32'h5);
    fire(1);
    idle(400);
    begin
      int k;
      k = 0;
      forever begin
        bus_read(12'h01D, st);
        if (!st[0]) break;
        bus_read(12'h01C, d);
        checks++;
        if ((k == 0 && d != {4'd8, 4'd1, 8'h3C, 16'(REC_WORDS)}) || (k == 2 && !near(int'(d[15:0]), amp(1))) ||
            (k == REC_WORDS - 1) != st[1]) begin
          failures++; $display("diag word %0d %h", k, d);
        end
        k++;
      end
      checks++;
      if (k != REC_WORDS) begin failures++; $display("diag words %0d", k); end else n_diag++;
    end
    read_meta(cnt, wrw);

    // phase 4: output stalled, buffer fills, channels go dead
    bus_write(12'h000, 32'h1);
    tx_en = 0;
    for (int r = 0; r < 12; r++) begin
      for (int c = 0; c < NCH; c++) begin fire(c); idle(11); end
      idle(400);
    end
    bus_read(12'h003, d);
    checks++; if (d < 32'd200) begin failures++; $display("buffer count %0d", d); end
    tx_en = 1;
    idle(30000);
    sum_out = 0; sum_in = 0;
    for (int c = 0; c < NCH; c++) begin
      bus_read(12'(12'h100 + 64 * c + 6'h24), d);
      bus_read(12'(12'h100 + 64 * c + 6'h25), d2);
      sum_in += int'(d); sum_out += int'(d2);
      if (d > d2) n_dead++;
    end
    bus_read(12'h020, d);
    bus_read(12'h024, d2);
    checks += 3;
    if (sum_in != 2 * NCH + 3 + 1 + 12 * NCH) begin failures++; $display("inputs %0d", sum_in); end
    if (sum_out != n_frames_seen + 1 + 1) begin
      failures++; $display("outputs %0d frames %0d", sum_out, n_frames_seen);
    end
    if (d2 != 32'(n_frames_seen) || d != 32'(n_frames_seen + 1)) begin
      failures++; $display("counters fwd %0d frames %0d seen %0d", d, d2, n_frames_seen);
    end else n_stats++;
    bus_read(12'h023, d);
    $display("frames %0d mca %0d meta %0d meta_drop %0d full %0d dead %0d", n_frames_seen, n_mca, n_meta, d,
             n_full, n_dead);
    // every mechanism must have happened
    checks += 10;
    if (n_frames_seen == 0) failures++;
    if (n_mca == 0) failures++;
    if (n_meta == 0) failures++;
    if (n_wr == 0) failures++;
    if (n_disc == 0) failures++;
    if (n_fwd_gated != 2) failures++;
    if (n_wait == 0) failures++;
    if (n_diag == 0) failures++;
    if (n_full == 0) failures++;
    if (n_dead == 0 || n_stats == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
