// tb_event_funnel: four sources send records of random length (each word
// tagged with source, record number and word number) with random gaps; the
// sink stalls at random. Checks that records arrive whole (never
// interleaved), in order per source, with last on the final word, that no
// word is lost, and that after a record from one source the grant moves on
// when others are waiting (round robin).
module tb_event_funnel;
  localparam int N = 4, NREC = 60;
  logic clk = 0, rst = 1;
  logic [N-1:0] iv, ir, il;
  logic [N-1:0][31:0] id;
  logic ov, ordy, ol;
  logic [31:0] od;
  int checks = 0, failures = 0;
  int rec_no [N], word_no [N], rec_len [N], exp_rec [N];
  logic hs_o, hs_l;
  logic [31:0] hs_d;
  logic [N-1:0] hs_i, hs_v;
  int cur_src = -1, cur_word = 0, done_recs = 0, last_src = -1, rr_viol = 0;

  event_funnel #(.N(N)) dut (.clk, .rst, .in_valid(iv), .in_ready(ir), .in_data(id), .in_last(il),
                             .out_valid(ov), .out_ready(ordy), .out_data(od), .out_last(ol));

  always #5 clk = ~clk;

  initial begin
    #5_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sources
  always_comb
    for (int s = 0; s < N; s++) begin
      id[s] = {8'(s), 12'(rec_no[s]), 12'(word_no[s])};
      il[s] = (word_no[s] == rec_len[s] - 1);
    end

  initial begin
    for (int s = 0; s < N; s++) begin rec_no[s] = 0; word_no[s] = 0; rec_len[s] = 1 + s; exp_rec[s] = 0; end
    iv = '0; ordy = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    while (done_recs < N * NREC) begin
      @(negedge clk);
      for (int s = 0; s < N; s++)
        if (!iv[s] && rec_no[s] < NREC && $urandom_range(0, 3) == 0) iv[s] = 1;
      ordy = ($urandom_range(0, 3) != 0);
      #1;
      hs_o = ov && ordy; hs_d = od; hs_l = ol; hs_i = iv & ir; hs_v = iv;
      @(posedge clk);
      #1;
      // sink side
      if (hs_o) begin
        int s, r, w;
        s = int'(hs_d[31:24]); r = int'(hs_d[23:12]); w = int'(hs_d[11:0]);
        checks += 3;
        if (cur_src >= 0 && s != cur_src) begin failures++; $display("interleaved %0t s%0d r%0d w%0d cur s%0d w%0d", $time, s, r, w, cur_src, cur_word); end
        if (r != exp_rec[s] || w != cur_word) begin failures++; $display("order s%0d r%0d w%0d", s, r, w); end
        if (hs_l !== (w == 1 + s + (r % 5) * 7 - 1)) begin failures++; $display("last flag"); end
        cur_src = s;
        cur_word++;
        if (hs_l) begin
          // round robin: a source must not be served twice in a row while another waits
          if (last_src == s && (hs_v & ~(N'(1) << s)) != 0 && w == 0 && cur_word == 1) rr_viol++;
          last_src = s;
          cur_src = -1; cur_word = 0; exp_rec[s]++; done_recs++;
        end
      end
      // source side
      for (int s = 0; s < N; s++)
        if (hs_i[s]) begin
          if (il[s]) begin
            iv[s] = 0; word_no[s] = 0; rec_no[s]++;
            rec_len[s] = 1 + s + (rec_no[s] % 5) * 7;
          end else word_no[s]++;
        end
    end
    checks++;
    if (rr_viol > 0) begin failures++; $display("round robin violated %0d times", rr_viol); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
