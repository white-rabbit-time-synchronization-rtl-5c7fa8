// tb_sync_fifo: random pushes and pops against a queue model on a 16-word
// FIFO, checking first-word-fall-through data, full, empty and count, and
// filling it completely to exercise the full flag.
module tb_sync_fifo;
  localparam int D = 16;
  logic clk = 0, rst = 1, wr = 0, rd = 0, full, empty;
  logic [31:0] din = '0, dout;
  logic [$clog2(D):0] count;
  int checks = 0, failures = 0, nfull = 0;
  logic [31:0] q [$];

  sync_fifo #(.W(32), .DEPTH(D)) dut (.clk, .rst, .wr_en(wr), .din, .full, .rd_en(rd), .dout, .empty, .count);

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 4000; i++) begin
      int bias;
      bias = (i / 500) % 2 ? 70 : 30;   // alternate filling and draining phases
      @(negedge clk);
      checks += 3;
      if (empty !== (q.size() == 0)) begin failures++; $display("empty flag"); end
      if (full !== (q.size() == D)) begin failures++; $display("full flag"); end
      if (count !== ($clog2(D)+1)'(q.size())) begin failures++; $display("count"); end
      if (q.size() > 0) begin
        checks++;
        if (dout !== q[0]) begin failures++; $display("data %h exp %h", dout, q[0]); end
      end
      if (full) nfull++;
      wr = ($urandom_range(0, 99) >= bias) && !full;
      rd = ($urandom_range(0, 99) < bias) && !empty;
      din = $urandom;
      @(posedge clk);
      if (wr) q.push_back(din);
      if (rd) void'(q.pop_front());
    end
    checks++;
    if (nfull == 0) begin failures++; $display("never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
