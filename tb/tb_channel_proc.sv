// tb_channel_proc: one channel end to end. Exponential pulses of known
// amplitude on a baseline are digitized into the channel; the testbench
// models the fast filter to find each trigger sample, and checks every word
// of each record: header, local time stamp (= trigger sample), energy (the
// pulse amplitude within +-3 after decay correction), White Rabbit word,
// CFD time (reference computed from the modelled filter), the three short
// sums and all waveform samples. A pulse during the dead time of the
// previous one must be counted as input but not recorded; the record stream
// is stalled at random. Statistics are checked at the end.
module tb_channel_proc;
  import pnxl_pkg::*;
  localparam int NS = 1700;
  localparam real TAU = 500.0;
  logic clk = 0, rst = 1, run = 0;
  logic [ADC_W-1:0] adc = '0;
  chan_cfg_t cfg;
  wr_time_t wrt;
  logic rv, rr = 0, rl, evd;
  logic [31:0] rd;
  logic [15:0] eve;
  logic [47:0] rtime, ltime;
  logic [31:0] icnt, ocnt;
  int checks = 0, failures = 0;
  int xs [NS + 300];
  int F [NS + 300];
  int trig_at [$];
  int amp_at [$];
  logic [31:0] rec [$];
  int nrec = 0, nev = 0;

  channel_proc #(.CH(4'd2)) dut (.clk, .rst, .run, .adc, .cfg, .module_id(8'h5A), .wr_time(wrt),
    .rec_valid(rv), .rec_ready(rr), .rec_data(rd), .rec_last(rl), .ev_done(evd), .ev_energy(eve),
    .real_time(rtime), .live_time(ltime), .in_count(icnt), .out_count(ocnt));

  always #5 clk = ~clk;

  initial begin
    #5_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int xv(int i);
    return (i < 1) ? 0 : xs[i];
  endfunction

  function automatic longint cv(int n);
    longint a, b;
    a = (n - int'(cfg.cfd_delay) >= 1) ? longint'(F[n - int'(cfg.cfd_delay)]) : 0;
    b = (n >= 1) ? longint'(F[n]) : 0;
    return 256 * a - longint'(cfg.cfd_w) * b;
  endfunction

  task automatic check_record(int idx);
    int t, a, e_int, found;
    longint e_frac, p, c;
    t = trig_at[idx]; a = amp_at[idx];
    checks += 9;
    if (rec.size() != REC_WORDS) begin failures++; $display("record length %0d", rec.size()); return; end
    if (rec[0] !== {4'd8, 4'd2, 8'h5A, 16'(REC_WORDS)}) begin failures++; $display("w0 %h", rec[0]); end
    if ({rec[2][31:16], rec[1]} !== 48'(t)) begin failures++; $display("ts %0d exp %0d", rec[1], t); end
    if (int'(rec[2][15:0]) < a - 3 || int'(rec[2][15:0]) > a + 3) begin
      failures++; $display("energy %0d exp %0d", rec[2][15:0], a);
    end
    if (rec[3] !== 32'(t >> 1)) begin failures++; $display("wr word %0d exp %0d", rec[3], t >> 1); end
    // CFD reference
    found = 0; e_int = 0; e_frac = 0;
    for (int j = 0; j < CFD_WIN; j++) begin
      int m;
      m = t - CFD_PRE + j;
      p = cv(m - 1); c = cv(m);
      if (!found && p < 0 && c >= 0) begin
        found = 1; e_int = m - 1 - t;
        e_frac = ((-p) * 65536) / (c - p);
        if (e_frac > 65535) e_frac = 65535;
      end
    end
    if (rec[4] !== {16'(e_frac), 8'(e_int), 7'd0, 1'(found)} || !found) begin
      failures++; $display("cfd %h exp int %0d frac %0d", rec[4], e_int, e_frac);
    end
    for (int i = 0; i < 3; i++) begin
      int s = 0;
      for (int k = 0; k < int'(cfg.psa_len[i]); k++) s += xv(t + int'($signed(cfg.psa_start[i])) + k);
      if (rec[5 + i] !== 32'(s)) begin failures++; $display("psa%0d %0d exp %0d", i, rec[5 + i], s); end
    end
    for (int k = 0; k < TRACE_LEN / 2; k++) begin
      int s0, s1;
      s0 = xv(t - int'(cfg.trace_pre) + 2 * k); s1 = xv(t - int'(cfg.trace_pre) + 2 * k + 1);
      checks++;
      if (rec[8 + k] !== {16'(s1), 16'(s0)}) begin
        failures++; if (failures < 10) $display("trace word %0d %h exp %h", k, rec[8 + k], {16'(s1), 16'(s0)});
      end
    end
  endtask

  // record sink with random stalls
  always begin
    logic hv, hl;
    logic [31:0] hd;
    @(negedge clk);
    rr = ($urandom_range(0, 2) != 0);
    #1;
    hv = rv && rr; hl = rl; hd = rd;
    @(posedge clk);
    #1;
    if (evd) begin
      nev++;
      ev_q.push_back(eve);
    end
    if (hv) begin
      rec.push_back(hd);
      if (hl) begin
        if (nrec < trig_at.size()) check_record(nrec);
        checks++;
        if (ev_q.size() == 0 || ev_q.pop_front() !== rec[2][15:0]) begin failures++; $display("ev_energy"); end
        nrec++;
        rec.delete();
      end
    end
  end
  logic [15:0] ev_q [$];

  initial begin
    int pulses [5] = '{100, 400, 460, 900, 1300};
    int amps [5] = '{1500, 3000, 2000, 1000, 2500};
    int armed;
    cfg = '0;
    cfg.enable = 1; cfg.fast_len = 4; cfg.fast_gap = 2; cfg.threshold = 2500;
    cfg.slow_len = 32; cfg.slow_gap = 8; cfg.baseline = 500;
    begin
      real b;
      b = $exp(-1.0 / TAU);
      cfg.c1 = COEF_W'(longint'((1.0 - b) / (1.0 - b ** 32.0) * 1073741824.0));
      cfg.cg = COEF_W'(longint'((1.0 - b) * 1073741824.0));
      cfg.c0 = COEF_W'(longint'(-(1.0 - b) * (b ** 32.0) / (1.0 - b ** 32.0) * 1073741824.0));
    end
    cfg.psa_start = {8'd10, 8'd0, -8'sd12};
    cfg.psa_len = {5'd20, 5'd6, 5'd10};
    cfg.cfd_delay = 3; cfg.cfd_w = 96; cfg.trace_pre = 20;
    wrt = '0;
    // stimulus and the trigger model
    for (int i = 1; i < NS + 300; i++) begin
      real v;
      v = 500.0;
      foreach (pulses[p]) if (i >= pulses[p]) v += $itor(amps[p]) * $exp(-$itor(i - pulses[p]) / TAU);
      xs[i] = int'(v);
    end
    armed = 0;
    for (int i = 1; i < NS + 300; i++) begin
      F[i] = 0;
      for (int k = 0; k < 4; k++) F[i] += xv(i - k);
      for (int k = 6; k < 10; k++) F[i] -= xv(i - k);
      if (armed && F[i] >= 2500) begin
        // the dead-time pulse (third) is not recorded
        int pidx;
        pidx = -1;
        foreach (pulses[p]) if (i >= pulses[p] && i < pulses[p] + 10) pidx = p;
        if (pidx != 2) begin
          trig_at.push_back(i);
          amp_at.push_back(amps[pidx]);
        end
      end
      armed = (F[i] < 2500);
    end
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk);
    run = 1; adc = ADC_W'(xs[1]);
    for (int i = 1; i < NS; i++) begin
      @(negedge clk);
      wrt.cycles = 28'(i);
      adc = ADC_W'(xs[i + 1]);
    end
    repeat (400) @(negedge clk);
    checks += 5;
    if (trig_at.size() != 4) begin failures++; $display("model triggers %0d", trig_at.size()); end
    if (nrec != 4) begin failures++; $display("records %0d", nrec); end
    if (nev != 4) begin failures++; $display("events %0d", nev); end
    if (icnt !== 32'd5 || ocnt !== 32'd4) begin failures++; $display("counts in %0d out %0d", icnt, ocnt); end
    if (ltime >= rtime || rtime < 48'(NS)) begin failures++; $display("times"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
