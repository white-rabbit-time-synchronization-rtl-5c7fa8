// event_funnel: merges the record streams of all channels into one.
//
// A round-robin arbiter grants one channel at a time and keeps the grant until
// that channel's last word has been accepted, so records are never
// interleaved. After a record the search for the next requester starts at the
// channel after the one just served, which keeps a busy channel from starving
// the others. The output is a combinational multiplex of the granted input;
// a record's first word can pass in the same clock the grant is made.
// The paper says the data of all channels is funneled into the output FIFO;
// the round-robin rule is this design's choice.
module event_funnel #(
  parameter int unsigned N = 4
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [N-1:0]      in_valid,
  output logic [N-1:0]      in_ready,
  input  logic [N-1:0][31:0] in_data,
  input  logic [N-1:0]      in_last,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [31:0]       out_data,
  output logic              out_last
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] rr, sel, sel_q;
  logic          locked, found;

  // pick the first requesting channel at or after rr
  always_comb begin
    sel   = rr;
    found = 1'b0;
    for (int k = 0; k < int'(N); k++) begin
      logic [IW-1:0] c;
      c = IW'((int'(rr) + k) % int'(N));
      if (!found && in_valid[c]) begin
        sel   = IW'(c);
        found = 1'b1;
      end
    end
  end

  logic [IW-1:0] cur;
  assign cur = locked ? sel_q : sel;

  always_comb begin
    in_ready  = '0;
    out_valid = locked ? in_valid[cur] : found;
    out_data  = in_data[cur];
    out_last  = in_last[cur];
    if (locked || found) in_ready[cur] = out_ready;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rr <= '0; sel_q <= '0; locked <= 1'b0;
    end else if (out_valid && out_ready) begin
      if (out_last) begin
        locked <= 1'b0;
        rr     <= IW'((int'(cur) + 1) % N);
      end else begin
        locked <= 1'b1;
        sel_q  <= cur;
      end
    end
  end
endmodule
