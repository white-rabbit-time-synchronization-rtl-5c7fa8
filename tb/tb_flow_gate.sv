// tb_flow_gate: feeds records with known White Rabbit time words through the
// gate from a first-word-fall-through source and checks, per mode:
//  - free flowing: every record is forwarded whole and in order;
//  - processor directed: records older than the acceptance range are
//    discarded, records inside it forwarded, and a later record waits until
//    a new range is written;
//  - diagnostic: forwarded records come out of the diagnostic port instead.
// Random stalls on both output ports; the counters are checked at the end.
module tb_flow_gate;
  import pnxl_pkg::*;
  logic clk = 0, rst = 1, gated = 0, diag = 0, acc_valid = 0;
  logic [31:0] acc_lo = 0, acc_hi = 0;
  logic iv, ir, ev, er, el, dv, dr, dl, waiting;
  logic [31:0] idata, ed, dd, nf, nd;
  int checks = 0, failures = 0;
  logic [31:0] src [$];       // words still to be offered
  logic [31:0] exp_eth [$], exp_dia [$];
  int exp_fwd = 0, exp_disc = 0, n_wait = 0;

  flow_gate dut (.clk, .rst, .gated, .diag, .acc_valid, .acc_lo, .acc_hi,
                 .in_valid(iv), .in_ready(ir), .in_data(idata),
                 .eth_valid(ev), .eth_ready(er), .eth_data(ed), .eth_last(el),
                 .dia_valid(dv), .dia_ready(dr), .dia_data(dd), .dia_last(dl),
                 .waiting, .n_forwarded(nf), .n_discarded(nd));

  always #5 clk = ~clk;

  initial begin
    #5_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  assign iv = src.size() > 0;
  assign idata = iv ? src[0] : 32'd0;

  // one record: header with length and time, body words tagged with the time
  task automatic add_record(int t, int len, bit expect_fwd, bit to_dia);
    logic [31:0] w [$];
    w.push_back({4'd8, 4'd1, 8'd7, 16'(len)});
    for (int k = 1; k < len; k++) w.push_back((k == 3) ? 32'(t) : {16'(t), 16'(k)});
    foreach (w[k]) begin
      src.push_back(w[k]);
      if (expect_fwd) begin
        if (to_dia) exp_dia.push_back(w[k]);
        else        exp_eth.push_back(w[k]);
      end
    end
    if (expect_fwd) exp_fwd++; else exp_disc++;
  endtask

  // handshakes: sampled after the inputs settle, applied after the clock edge
  always begin
    logic hi, he, hd, hl, hw;
    logic [31:0] hed, hdd;
    @(negedge clk);
    er = ($urandom_range(0, 3) != 0);
    dr = ($urandom_range(0, 2) != 0);
    #1;
    hi = iv && ir; he = ev && er; hd = dv && dr; hl = el; hed = ed; hdd = dd; hw = waiting;
    @(posedge clk);
    #1;
    if (!rst) begin
      if (hi) void'(src.pop_front());
      if (he) begin
        checks++;
        if (exp_eth.size() == 0 || hed !== exp_eth[0]) begin failures++; $display("eth word %h", hed); end
        else begin
          checks++;
          if (hl !== (exp_eth.size() == 1 || exp_eth[1][31:16] == 16'h8107)) begin
            failures++; $display("eth last");
          end
          void'(exp_eth.pop_front());
        end
      end
      if (hd) begin
        checks++;
        if (exp_dia.size() == 0 || hdd !== exp_dia[0]) begin failures++; $display("dia word %h", hdd); end
        else void'(exp_dia.pop_front());
      end
      if (hw) n_wait++;
    end
  end

  task automatic drain(int max);
    int n = 0;
    while ((src.size() > 0 || exp_eth.size() > 0 || exp_dia.size() > 0) && n < max) begin
      @(negedge clk); n++;
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    // free flowing
    add_record(100, REC_WORDS, 1, 0);
    add_record(50, REC_WORDS, 1, 0);
    add_record(7, 8, 1, 0);
    drain(2000);
    // processor directed, range [150, 250]
    gated = 1;
    acc_lo = 150; acc_hi = 250; acc_valid = 1;
    add_record(120, REC_WORDS, 0, 0);   // older: discarded
    add_record(150, REC_WORDS, 1, 0);   // inside
    add_record(250, 20, 1, 0);          // inside (end of range)
    add_record(149, 8, 0, 0);           // older, header only: discarded
    add_record(300, REC_WORDS, 1, 0);   // later: waits for the next range
    drain(2000);
    checks++;
    if (exp_eth.size() != REC_WORDS || !waiting) begin failures++; $display("record did not wait"); end
    @(negedge clk);
    acc_lo = 280; acc_hi = 400;         // new range releases it
    drain(2000);
    // diagnostic destination, gated
    diag = 1;
    add_record(390, REC_WORDS, 1, 1);
    add_record(200, REC_WORDS, 0, 1);
    add_record(400, 12, 1, 1);
    drain(3000);
    // free flowing into diagnostic
    gated = 0;
    add_record(5, 30, 1, 1);
    drain(2000);
    repeat (5) @(negedge clk);
    checks += 4;
    if (exp_eth.size() != 0 || exp_dia.size() != 0) begin failures++; $display("words missing"); end
    if (nf !== 32'(exp_fwd)) begin failures++; $display("forwarded %0d exp %0d", nf, exp_fwd); end
    if (nd !== 32'(exp_disc)) begin failures++; $display("discarded %0d exp %0d", nd, exp_disc); end
    if (n_wait == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
