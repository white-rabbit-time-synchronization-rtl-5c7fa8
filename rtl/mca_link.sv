// mca_link: 4-bit data path carrying pulse heights to the Zynq processor,
// which histograms them into an MCA spectrum in its own memory.
//
// Each channel's newest energy waits in a one-entry holding register; if a
// channel records a second event before its first energy has been sent, the
// new energy is dropped and counted in n_dropped (the spectrum then
// undercounts, and software can correct with the count). A round-robin
// arbiter picks a waiting channel, and the word {channel[3:0], energy[15:0]}
// is sent as five nibbles, most significant first, one per clock with
// mca_valid high; mca_first marks the channel nibble. A word takes 5 clocks,
// so the link carries up to 25 million energies per second at 125 MHz.
//
// The paper gives only a separate 4-bit path for pulse heights; the framing
// with a first-nibble strobe, the channel nibble and the holding registers
// are this design's choices.
module mca_link #(
  parameter int unsigned N = 4
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [N-1:0]       ev_valid,
  input  logic [N-1:0][15:0] ev_energy,
  output logic [3:0]         mca_data,
  output logic               mca_valid,
  output logic               mca_first,
  output logic [31:0]        n_dropped
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [N-1:0]       pend;
  logic [N-1:0][15:0] held;
  logic [19:0]        shreg;
  logic [2:0]         left;       // nibbles still to send
  logic [IW-1:0]      rr, pick;
  logic               found, load;

  always_comb begin
    pick  = rr;
    found = 1'b0;
    for (int k = 0; k < int'(N); k++) begin
      logic [IW-1:0] c;
      c = IW'((int'(rr) + k) % int'(N));
      if (!found && pend[c]) begin
        pick  = IW'(c);
        found = 1'b1;
      end
    end
    // start a word when idle or when the last nibble goes out this clock
    load = found && (left <= 3'd1);
  end

  assign mca_data  = shreg[19:16];
  assign mca_valid = (left != 0);
  assign mca_first = (left == 3'd5);

  always_ff @(posedge clk) begin
    logic [31:0] nd;
    nd = n_dropped;
    if (rst) begin
      pend <= '0; held <= '0; shreg <= '0; left <= '0; rr <= '0; n_dropped <= '0;
    end else begin
      if (left != 0) begin
        shreg <= {shreg[15:0], 4'h0};
        left  <= left - 3'd1;
      end
      if (load) begin
        shreg <= {4'(pick), held[pick]};
        left  <= 3'd5;
        rr    <= IW'((int'(pick) + 1) % N);
      end
      for (int c = 0; c < int'(N); c++) begin
        if (load && IW'(c) == pick) pend[c] <= 1'b0;
        if (ev_valid[c]) begin
          if (pend[c] && !(load && IW'(c) == pick)) begin
            nd = nd + 32'd1;
          end else begin
            pend[c] <= 1'b1;
            held[c] <= ev_energy[c];
          end
        end
      end
      n_dropped <= nd;
    end
  end
endmodule
