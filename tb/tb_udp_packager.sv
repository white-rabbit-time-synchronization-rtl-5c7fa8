// tb_udp_packager: sends records of several lengths through the packager
// with random back-pressure and parses each frame independently: Ethernet
// addresses and type, IPv4 version/length/identification/flags/TTL/protocol,
// a ones-complement sum over the received IPv4 header (must be 0xFFFF),
// addresses, UDP ports and length, and the payload words, plus the sof/eof
// positions and frame length.
module tb_udp_packager;
  logic clk = 0, rst = 1;
  logic [47:0] smac = 48'h0200_1234_5678, dmac = 48'hA0B1_C2D3_E4F5;
  logic [31:0] sip = 32'hC0A8_0A02, dip = 32'hC0A8_0AFE;
  logic [15:0] sp = 16'd50000, dp = 16'd51000;
  logic iv, ir, il, tv, tr, tsof, teof;
  logic [31:0] idata;
  logic [15:0] td, nfr;
  int checks = 0, failures = 0;
  logic [31:0] src [$];
  logic [31:0] recs [$][$];
  logic [15:0] frame [$];
  int nframes = 0;

  udp_packager dut (.clk, .rst, .src_mac(smac), .dst_mac(dmac), .src_ip(sip), .dst_ip(dip),
                    .src_port(sp), .dst_port(dp), .in_valid(iv), .in_ready(ir), .in_data(idata),
                    .in_last(il), .tx_valid(tv), .tx_ready(tr), .tx_data(td), .tx_sof(tsof),
                    .tx_eof(teof), .n_frames(nfr));

  always #5 clk = ~clk;

  initial begin
    #5_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int src_left = 0;   // words left in the record at the head of src
  assign iv = src.size() > 0;
  assign idata = iv ? src[0] : 32'd0;
  assign il = (src_left == 1);

  task automatic check_frame();
    logic [31:0] rec [$];
    int n;
    logic [31:0] sum;
    rec = recs.pop_front();
    n = rec.size();
    checks += 12;
    if (frame.size() != 21 + 2 * n) begin failures++; $display("frame length %0d", frame.size()); return; end
    if ({frame[0], frame[1], frame[2]} !== dmac || {frame[3], frame[4], frame[5]} !== smac) begin failures++; $display("mac"); end
    if (frame[6] !== 16'h0800) begin failures++; $display("ethertype"); end
    if (frame[7] !== 16'h4500) begin failures++; $display("ver/ihl"); end
    if (frame[8] !== 16'(20 + 8 + 4 * n)) begin failures++; $display("ip length"); end
    if (frame[9] !== 16'(nframes)) begin failures++; $display("ip id %0d", frame[9]); end
    if (frame[10] !== 16'h4000 || frame[11] !== 16'h4011) begin failures++; $display("flags/ttl/proto"); end
    sum = 0;
    for (int k = 7; k < 17; k++) sum += 32'(frame[k]);
    while (sum > 32'hFFFF) sum = (sum & 32'hFFFF) + (sum >> 16);
    if (sum !== 32'hFFFF) begin failures++; $display("ip checksum, sum %h", sum); end
    if ({frame[13], frame[14]} !== sip || {frame[15], frame[16]} !== dip) begin failures++; $display("ip addr"); end
    if (frame[17] !== sp || frame[18] !== dp) begin failures++; $display("ports"); end
    if (frame[19] !== 16'(8 + 4 * n) || frame[20] !== 16'h0) begin failures++; $display("udp len"); end
    for (int k = 0; k < n; k++) begin
      checks++;
      if ({frame[21 + 2 * k], frame[22 + 2 * k]} !== rec[k]) begin failures++; $display("payload %0d", k); end
    end
    checks++;
    nframes++;
    frame.delete();
  endtask

  always begin
    logic hi, ht, hs, he;
    logic [15:0] hd;
    @(negedge clk);
    tr = ($urandom_range(0, 4) != 0);
    #1;
    hi = iv && ir; ht = tv && tr; hs = tsof; he = teof; hd = td;
    @(posedge clk);
    #1;
    if (!rst) begin
      if (hi) begin
        void'(src.pop_front());
        src_left--;
        if (src_left == 0 && src.size() > 0) src_left = int'(src[0][15:0]);
      end
      if (ht) begin
        checks++;
        if (hs !== (frame.size() == 0)) begin failures++; $display("sof"); end
        frame.push_back(hd);
        if (he) check_frame();
      end
    end
  end

  task automatic add(int n);
    logic [31:0] r [$];
    r.push_back({4'd8, 4'd2, 8'd9, 16'(n)});
    for (int k = 1; k < n; k++) r.push_back($urandom);
    if (src.size() == 0) src_left = n;
    foreach (r[k]) src.push_back(r[k]);
    recs.push_back(r);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    add(69); add(8); add(1); add(69);
    for (int k = 0; k < 6; k++) add(int'($urandom_range(2, 200)));
    for (int t = 0; t < 20000 && recs.size() > 0; t++) @(negedge clk);
    checks += 2;
    if (nframes != 10) begin failures++; $display("frames %0d", nframes); end
    if (nfr !== 16'd10) begin failures++; $display("frame counter"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
