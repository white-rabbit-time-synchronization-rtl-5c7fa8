// tb_mca_link: raises energies on random channels, decodes the 4-bit nibble
// stream (first-nibble strobe, channel nibble, four energy nibbles MSB
// first) and checks that every energy not dropped arrives once with its
// channel, that one word takes exactly five clocks, and that a second energy
// on a channel whose first is still waiting is dropped and counted.
module tb_mca_link;
  localparam int N = 4;
  logic clk = 0, rst = 1;
  logic [N-1:0] evv = '0;
  logic [N-1:0][15:0] eve;
  logic [3:0] md;
  logic mv, mf;
  logic [31:0] ndrop;
  int checks = 0, failures = 0, exp_drop = 0, got = 0, sent = 0;
  logic [15:0] pend [N][$];
  int nib = 0, cur_ch = 0;
  logic [15:0] cur_e;

  mca_link #(.N(N)) dut (.clk, .rst, .ev_valid(evv), .ev_energy(eve), .mca_data(md), .mca_valid(mv),
                         .mca_first(mf), .n_dropped(ndrop));

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // receiver
  always @(negedge clk) if (!rst && mv) begin
    if (mf) begin
      checks++;
      if (nib != 0) begin failures++; $display("word cut short"); end
      cur_ch = int'(md); nib = 1;
    end else begin
      cur_e = {cur_e[11:0], md};
      nib++;
      if (nib == 5) begin
        checks++;
        if (pend[cur_ch].size() == 0 || pend[cur_ch][0] !== cur_e) begin
          failures++; $display("ch%0d energy %0d unexpected", cur_ch, cur_e);
        end else void'(pend[cur_ch].pop_front());
        got++;
        nib = 0;
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    // slow: every energy is sent
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      #2;
      evv = '0;
      if (i % 23 == 0) begin
        int c;
        c = int'($urandom_range(0, N - 1));
        evv[c] = 1; eve[c] = 16'($urandom);
        pend[c].push_back(eve[c]); sent++;
      end
    end
    @(negedge clk); #2 evv = '0;
    repeat (40) @(negedge clk);
    checks++;
    if (got != sent) begin failures++; $display("got %0d of %0d", got, sent); end
    // burst: all channels at once, then channel 2 again at once -> dropped
    @(negedge clk); #2;
    for (int c = 0; c < N; c++) begin evv[c] = 1; eve[c] = 16'(1000 + c); pend[c].push_back(eve[c]); end
    @(negedge clk); #2;
    evv = '0; evv[2] = 1; eve[2] = 16'd7777; exp_drop++;
    @(negedge clk); #2 evv = '0;
    repeat (40) @(negedge clk);
    checks += 2;
    for (int c = 0; c < N; c++) if (pend[c].size() != 0) begin failures++; $display("ch%0d missing", c); end
    if (ndrop !== 32'(exp_drop)) begin failures++; $display("dropped %0d exp %0d", ndrop, exp_drop); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
