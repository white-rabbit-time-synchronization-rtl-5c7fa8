// tb_ctrl_io: writes every channel parameter and module register over the
// bus with distinct values, checks the parameter outputs and the read-back,
// reads statistics, counters and the White Rabbit snapshot, pops metadata
// and diagnostic words through their read ports, and checks the
// acceptance-range valid bit.
module tb_ctrl_io;
  import pnxl_pkg::*;
  localparam int N = NCH;
  logic clk = 0, rst = 1;
  logic [11:0] addr = '0;
  logic wr = 0, rd = 0;
  logic [31:0] wdata = '0, rdata;
  logic run, gated, diag, accv;
  logic [7:0] mid;
  chan_cfg_t [N-1:0] cfg;
  logic [31:0] alo, ahi, sip, dip;
  logic [47:0] dmac, smac;
  logic [15:0] sp, dp;
  wr_time_t wrt;
  logic [N-1:0][47:0] rt, lt;
  logic [N-1:0][31:0] ic, oc;
  logic [4:0][31:0] cnt;
  meta_t meta;
  logic meta_empty = 0, meta_pop, dia_valid = 1, dia_last = 0, dia_ready;
  logic [31:0] dia_data = 32'hD1A0_0000;
  int checks = 0, failures = 0, n_meta_pop = 0, n_dia_pop = 0;

  ctrl_io #(.N(N)) dut (.clk, .rst, .bus_addr(addr), .bus_wr(wr), .bus_rd(rd), .bus_wdata(wdata),
    .bus_rdata(rdata), .run, .gated, .diag, .module_id(mid), .cfg, .acc_valid(accv), .acc_lo(alo),
    .acc_hi(ahi), .dst_mac(dmac), .src_mac(smac), .src_ip(sip), .dst_ip(dip), .src_port(sp),
    .dst_port(dp), .wr_time(wrt), .fifo_empty(1'b1), .fifo_count(32'd77), .gate_waiting(1'b0),
    .real_time(rt), .live_time(lt), .in_count(ic), .out_count(oc), .counters(cnt),
    .meta_empty, .meta, .meta_pop, .dia_valid, .dia_data, .dia_last, .dia_ready);

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (meta_pop) n_meta_pop++;
    if (dia_ready) begin n_dia_pop++; dia_data <= dia_data + 1; end
  end

  task automatic bwrite(int a, logic [31:0] d);
    @(negedge clk); addr = 12'(a); wdata = d; wr = 1;
    @(negedge clk); wr = 0;
  endtask

  task automatic bread(int a, output logic [31:0] d);
    @(negedge clk); addr = 12'(a); rd = 1;
    @(negedge clk); rd = 0; d = rdata;
  endtask

  task automatic expect_rd(int a, logic [31:0] e, string what);
    logic [31:0] d;
    bread(a, d);
    checks++;
    if (d !== e) begin failures++; $display("%s: read %h exp %h", what, d, e); end
  endtask

  function automatic logic [31:0] pv(int c, int r);   // distinct test value per register
    return 32'(c * 7 + r * 3 + 1);
  endfunction

  initial begin
    for (int c = 0; c < N; c++) begin
      rt[c] = 48'h1_0000_0000 * (c + 1) + 5; lt[c] = 48'h2_0000_0000 + c; ic[c] = 100 + c; oc[c] = 50 + c;
    end
    cnt = {32'd5, 32'd4, 32'd3, 32'd2, 32'd1};
    wrt.tai_sec = 40'hAB_1234_5678; wrt.cycles = 28'h0ABC_DEF;
    meta = '{channel: 4'd3, energy: 16'd4321, local_ts: 48'h0000_1111_2222, wr_word: 32'hCAFE_F00D};
    repeat (3) @(negedge clk);
    rst = 0;
    // per-channel parameters
    for (int c = 0; c < N; c++)
      for (int r = 0; r <= 'h12; r++) bwrite('h100 + 'h40 * c + r, pv(c, r));
    for (int c = 0; c < N; c++) begin
      checks += 8;
      if (cfg[c].enable !== pv(c, 0)[0]) begin failures++; $display("enable"); end
      if (cfg[c].fast_len !== pv(c, 1)[4:0] || cfg[c].fast_gap !== pv(c, 2)[4:0]) begin failures++; $display("fast"); end
      if (cfg[c].threshold !== pv(c, 3)[15:0]) begin failures++; $display("thr"); end
      if (cfg[c].slow_len !== pv(c, 4)[6:0] || cfg[c].slow_gap !== pv(c, 5)[5:0]) begin failures++; $display("slow"); end
      if (cfg[c].c0 !== pv(c, 6) || cfg[c].cg !== pv(c, 7) || cfg[c].c1 !== pv(c, 8)) begin failures++; $display("coef"); end
      if (cfg[c].baseline !== pv(c, 9)[15:0]) begin failures++; $display("baseline"); end
      if (cfg[c].psa_start[2] !== pv(c, 'hC)[7:0] || cfg[c].psa_len[1] !== pv(c, 'hE)[4:0]) begin failures++; $display("psa"); end
      if (cfg[c].cfd_delay !== pv(c, 'h10)[3:0] || cfg[c].cfd_w !== pv(c, 'h11)[7:0] || cfg[c].trace_pre !== pv(c, 'h12)[5:0]) begin
        failures++; $display("cfd/trace");
      end
      expect_rd('h100 + 'h40 * c + 'h3, pv(c, 3) & 32'hFFFF, "thr readback");
      expect_rd('h100 + 'h40 * c + 'h7, pv(c, 7), "cg readback");
      expect_rd('h100 + 'h40 * c + 'h20, rt[c][31:0], "real lo");
      expect_rd('h100 + 'h40 * c + 'h21, 32'(rt[c][47:32]), "real hi");
      expect_rd('h100 + 'h40 * c + 'h23, 32'(lt[c][47:32]), "live hi");
      expect_rd('h100 + 'h40 * c + 'h24, ic[c], "in count");
      expect_rd('h100 + 'h40 * c + 'h25, oc[c], "out count");
    end
    // module registers
    bwrite('h000, 32'h5);
    checks++;
    if (!(run && !gated && diag)) begin failures++; $display("ctrl bits"); end
    expect_rd('h000, 32'h5, "ctrl");
    bwrite('h001, 32'h42); expect_rd('h001, 32'h42, "module id");
    bwrite('h011, 32'h3344_5566); bwrite('h010, 32'h1122);
    checks++;
    if (dmac !== 48'h1122_3344_5566) begin failures++; $display("dst mac"); end
    bwrite('h016, {16'd1234, 16'd5678});
    checks++;
    if (sp !== 16'd1234 || dp !== 16'd5678) begin failures++; $display("ports"); end
    expect_rd('h003, 32'd77, "fifo count");
    // acceptance range
    bwrite('h008, 32'd1000); bwrite('h009, 32'd2000);
    checks++;
    if (!accv || alo !== 32'd1000 || ahi !== 32'd2000) begin failures++; $display("range"); end
    bwrite('h00A, 0);
    checks++;
    if (accv) begin failures++; $display("range not cleared"); end
    // White Rabbit snapshot: the time moves on after the first read
    expect_rd('h004, 32'h1234_5678, "wr sec");
    wrt.tai_sec = 40'hFF_0000_0000; wrt.cycles = 28'd0;
    expect_rd('h005, 32'hAB, "wr sec hi snapshot");
    expect_rd('h006, 32'h0ABC_DEF, "wr cycles snapshot");
    // metadata: word 3 pops
    expect_rd('h018, {12'd0, 4'd3, 16'd4321}, "meta 0");
    expect_rd('h019, 32'h1111_2222, "meta 1");
    checks++;
    if (n_meta_pop != 0) begin failures++; $display("early pop"); end
    expect_rd('h01B, 32'hCAFE_F00D, "meta 3");
    checks++;
    if (n_meta_pop != 1) begin failures++; $display("meta pops %0d", n_meta_pop); end
    // diagnostic words pop one per read
    expect_rd('h01C, 32'hD1A0_0000, "diag 0");
    expect_rd('h01C, 32'hD1A0_0001, "diag 1");
    expect_rd('h01D, 32'h1, "diag status");
    expect_rd('h022, 32'd3, "counter 2");
    checks++;
    if (n_dia_pop != 2) begin failures++; $display("diag pops %0d", n_dia_pop); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
