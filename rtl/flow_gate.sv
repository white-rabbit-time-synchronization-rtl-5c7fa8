// flow_gate: decides, record by record, what leaves the output buffer.
//
// The gate reads the HDR_WORDS header words of the next record from the FIFO
// and then, in free-flowing mode (gated = 0), forwards the whole record. In
// processor-directed mode (gated = 1) it compares the record's White Rabbit
// time word (header word 3) with the acceptance range [acc_lo, acc_hi] most
// recently written by the Zynq processor:
//   time <  acc_lo            the record is discarded (it is older than any
//                             acceptance still to come);
//   acc_lo <= time <= acc_hi  the record is forwarded;
//   time >  acc_hi, or no range is valid
//                             the gate waits for a new range (back-pressure
//                             on the FIFO).
// Forwarded records go to the Ethernet packager, or, with diag = 1, to the
// controller bus for diagnostic readout. Counters report forwarded and
// discarded records. Record length is taken from header word 0.
//
// The accept-within-range and discard-before-range rules are the paper's;
// the header buffering, the waiting rule for later records and the unsigned
// (non-wrapping) time comparison are this design's choices.
module flow_gate
  import pnxl_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        gated,
  input  logic        diag,
  input  logic        acc_valid,
  input  logic [31:0] acc_lo,
  input  logic [31:0] acc_hi,
  // from the FIFO (first word fall through)
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [31:0] in_data,
  // to the UDP packager
  output logic        eth_valid,
  input  logic        eth_ready,
  output logic [31:0] eth_data,
  output logic        eth_last,
  // to the diagnostic readout
  output logic        dia_valid,
  input  logic        dia_ready,
  output logic [31:0] dia_data,
  output logic        dia_last,
  output logic        waiting,
  output logic [31:0] n_forwarded,
  output logic [31:0] n_discarded
);
  typedef enum logic [2:0] {HDR, DECIDE, FWD_HDR, FWD_BODY, DROP} state_t;
  state_t state;

  logic [31:0] hbuf [HDR_WORDS];
  logic [3:0]  hidx;
  logic [15:0] left;          // body words still to move
  logic        to_diag;
  logic        o_valid, o_ready, o_last;
  logic [31:0] o_data;
  logic [31:0] t;
  logic [15:0] len;

  assign t   = hbuf[3];
  assign len = (hbuf[0][15:0] < 16'(HDR_WORDS)) ? 16'(HDR_WORDS) : hbuf[0][15:0];

  // output multiplex
  assign o_ready   = to_diag ? dia_ready : eth_ready;
  assign eth_valid = o_valid && !to_diag;
  assign dia_valid = o_valid &&  to_diag;
  assign eth_data  = o_data;
  assign dia_data  = o_data;
  assign eth_last  = o_last;
  assign dia_last  = o_last;
  assign waiting   = (state == DECIDE);

  always_comb begin
    o_valid  = 1'b0;
    o_data   = hbuf[hidx[2:0]];
    o_last   = 1'b0;
    in_ready = 1'b0;
    unique case (state)
      HDR:      in_ready = 1'b1;
      FWD_HDR: begin
        o_valid = 1'b1;
        o_last  = (hidx == 4'(HDR_WORDS - 1)) && (left == 0);
      end
      FWD_BODY: begin
        o_valid  = in_valid;
        o_data   = in_data;
        o_last   = (left == 16'd1);
        in_ready = o_ready;
      end
      DROP:     in_ready = 1'b1;
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= HDR; hidx <= '0; left <= '0; to_diag <= 1'b0;
      n_forwarded <= '0; n_discarded <= '0;
      for (int k = 0; k < HDR_WORDS; k++) hbuf[k] <= '0;
    end else begin
      unique case (state)
        HDR: if (in_valid) begin
          hbuf[hidx[2:0]] <= in_data;
          hidx <= hidx + 4'd1;
          if (hidx == 4'(HDR_WORDS - 1)) state <= DECIDE;
        end
        DECIDE: begin
          hidx    <= '0;
          left    <= len - 16'(HDR_WORDS);
          to_diag <= diag;
          if (!gated || (acc_valid && t >= acc_lo && t <= acc_hi)) begin
            state <= FWD_HDR;
          end else if (acc_valid && t < acc_lo) begin
            state <= (len == 16'(HDR_WORDS)) ? HDR : DROP;
            n_discarded <= n_discarded + 32'd1;
          end
        end
        FWD_HDR: if (o_ready) begin
          hidx <= hidx + 4'd1;
          if (hidx == 4'(HDR_WORDS - 1)) begin
            hidx  <= '0;
            state <= (left == 0) ? HDR : FWD_BODY;
            if (left == 0) n_forwarded <= n_forwarded + 32'd1;
          end
        end
        FWD_BODY: if (in_valid && o_ready) begin
          left <= left - 16'd1;
          if (left == 16'd1) begin
            state <= HDR;
            n_forwarded <= n_forwarded + 32'd1;
          end
        end
        DROP: if (in_valid) begin
          left <= left - 16'd1;
          if (left == 16'd1) state <= HDR;
        end
        default: state <= HDR;
      endcase
    end
  end
endmodule
