// udp_packager: wraps each event record into one Ethernet/IPv4/UDP frame for
// the user-data port of the White Rabbit core.
//
// On the first word of a record the packager reads the record length (header
// word 0, bits 15:0, in 32-bit words) without consuming the word, computes the
// IPv4 total length, UDP length and IPv4 header checksum, and then sends a
// 16-bit big-endian stream:
//   Ethernet header  7 half-words: destination MAC, source MAC, type 0x0800
//   IPv4 header     10 half-words: version 4, IHL 5, DSCP 0, total length,
//                   identification (counts frames), flags DF, TTL 64,
//                   protocol 17, checksum, source and destination address
//   UDP header       4 half-words: ports, length, checksum 0 (unused)
//   payload          each record word as bits 31:16, then 15:0
// tx_sof marks the first and tx_eof the last half-word of a frame. The frame
// check sequence and padding are left to the MAC. Addresses and ports come
// from registers.
//
// The paper says records are assembled with IPv4 and UDP headers, one event
// per packet, for the White Rabbit core's user-data interface. The Ethernet
// header, field values, 16-bit stream with valid/ready (the core's own fabric
// adapter is not modelled) and zero UDP checksum are this design's choices.
module udp_packager (
  input  logic        clk,
  input  logic        rst,
  input  logic [47:0] src_mac,
  input  logic [47:0] dst_mac,
  input  logic [31:0] src_ip,
  input  logic [31:0] dst_ip,
  input  logic [15:0] src_port,
  input  logic [15:0] dst_port,
  // records
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [31:0] in_data,
  input  logic        in_last,
  // frames
  output logic        tx_valid,
  input  logic        tx_ready,
  output logic [15:0] tx_data,
  output logic        tx_sof,
  output logic        tx_eof,
  output logic [15:0] n_frames
);
  localparam int HDR_HW = 21;

  typedef enum logic [1:0] {IDLE, HEAD, BODY} state_t;
  state_t state;

  logic [15:0] ip_len, udp_len, ip_id, csum;
  logic [4:0]  hw;         // header half-word index
  logic        half;       // 0: bits 31:16, 1: bits 15:0
  logic [15:0] hdr [HDR_HW];
  logic [19:0] csum_acc;
  logic [15:0] csum_fold;

  // IPv4 header checksum of the frame about to be sent
  always_comb begin
    logic [15:0] l;
    l = 16'd28 + {in_data[13:0], 2'b00};
    csum_acc = 20'h04500 + 20'(l) + 20'(ip_id) + 20'h04000 + 20'h04011
             + 20'(src_ip[31:16]) + 20'(src_ip[15:0]) + 20'(dst_ip[31:16]) + 20'(dst_ip[15:0]);
    csum_fold = csum_acc[15:0] + 16'(csum_acc[19:16]);
    if (csum_fold < 16'(csum_acc[19:16])) csum_fold = csum_fold + 16'd1;  // end-around carry
  end

  always_comb begin
    hdr[0]  = dst_mac[47:32]; hdr[1] = dst_mac[31:16]; hdr[2] = dst_mac[15:0];
    hdr[3]  = src_mac[47:32]; hdr[4] = src_mac[31:16]; hdr[5] = src_mac[15:0];
    hdr[6]  = 16'h0800;
    hdr[7]  = 16'h4500;       hdr[8] = ip_len;         hdr[9] = ip_id;
    hdr[10] = 16'h4000;       hdr[11] = 16'h4011;      hdr[12] = csum;
    hdr[13] = src_ip[31:16];  hdr[14] = src_ip[15:0];
    hdr[15] = dst_ip[31:16];  hdr[16] = dst_ip[15:0];
    hdr[17] = src_port;       hdr[18] = dst_port;      hdr[19] = udp_len;
    hdr[20] = 16'h0000;
  end

  always_comb begin
    tx_valid = 1'b0;
    tx_data  = hdr[hw];
    tx_sof   = 1'b0;
    tx_eof   = 1'b0;
    in_ready = 1'b0;
    unique case (state)
      HEAD: begin
        tx_valid = 1'b1;
        tx_sof   = (hw == 5'd0);
      end
      BODY: begin
        tx_valid = in_valid;
        tx_data  = half ? in_data[15:0] : in_data[31:16];
        tx_eof   = half && in_last;
        in_ready = half && tx_ready;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= IDLE; hw <= '0; half <= 1'b0;
      ip_len <= '0; udp_len <= '0; ip_id <= '0; csum <= '0; n_frames <= '0;
    end else begin
      unique case (state)
        IDLE: if (in_valid) begin
          ip_len  <= 16'd28 + {in_data[13:0], 2'b00};
          udp_len <= 16'd8  + {in_data[13:0], 2'b00};
          csum    <= ~csum_fold;
          hw      <= '0;
          state   <= HEAD;
        end
        HEAD: if (tx_ready) begin
          hw <= hw + 5'd1;
          if (hw == 5'(HDR_HW - 1)) begin
            state <= BODY;
            half  <= 1'b0;
          end
        end
        BODY: if (in_valid && tx_ready) begin
          half <= !half;
          if (half && in_last) begin
            state    <= IDLE;
            ip_id    <= ip_id + 16'd1;
            n_frames <= n_frames + 16'd1;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
