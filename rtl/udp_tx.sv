// udp_tx: transmit-side UDP/IP encapsulation of the GbE channel.
//
// Wraps each outbound payload (32-bit words, byte length with the first
// word) in a UDP datagram inside an IPv4 packet inside an Ethernet frame and
// streams it to the MAC on 32-bit Avalon-ST, first byte in bits 31:24. As on
// the receive side, the MAC is assumed to drop two leading pad bytes (16-bit
// transmit shift), so the frame is 11 header words followed by the payload:
//   w0 {pad16, dst MAC 47:32}  w1 dst MAC 31:0    w2 src MAC 47:16
//   w3 {src MAC 15:0, 0x0800}  w4 {0x45, 0x00, IP total length}
//   w5 {id 0, flags DF}        w6 {TTL 64, proto 17, header checksum}
//   w7 src IP  w8 dst IP       w9 {src port, dst port}  w10 {UDP length, 0}
// The IPv4 header checksum is the ones'-complement of the ones'-complement
// sum of the header's 16-bit words; the UDP checksum is sent as zero, which
// IPv4 allows. The UDP destination port is the packet's tag when nonzero,
// otherwise cfg_dst_port. The MAC pads short frames.
//
// Timing: registered output; 11 header cycles, then one payload word per
// clock. The paper says outbound payload is re-encapsulated in the output
// channel's transport protocol (e.g. UDP); the header values (TTL, DF, zero
// UDP checksum, fixed addresses from configuration) are this design's.
module udp_tx (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [47:0] cfg_src_mac,
  input  logic [47:0] cfg_dst_mac,
  input  logic [31:0] cfg_src_ip,
  input  logic [31:0] cfg_dst_ip,
  input  logic [15:0] cfg_src_port,
  input  logic [15:0] cfg_dst_port,
  // payload stream
  input  logic [31:0] pl_data,
  input  logic        pl_valid,
  input  logic        pl_sop,
  input  logic        pl_eop,
  input  logic [1:0]  pl_empty,
  input  logic [15:0] pl_len,
  input  logic [15:0] pl_tag,
  output logic        pl_ready,
  // Avalon-ST to the MAC
  output logic [31:0] tx_data,
  output logic        tx_valid,
  output logic        tx_sop,
  output logic        tx_eop,
  output logic [1:0]  tx_empty,
  input  logic        tx_ready,
  output logic [31:0] cnt_frames
);
  typedef enum logic [1:0] {S_IDLE, S_HDR, S_DATA} state_t;
  state_t       state;
  logic [3:0]   w;
  logic [15:0]  len, dport;
  logic         can_load;

  assign can_load = !tx_valid || tx_ready;
  assign pl_ready = state == S_DATA && can_load;

  // IPv4 header checksum for the datagram being sent
  function automatic logic [15:0] ip_csum(logic [15:0] totlen, logic [31:0] sip, logic [31:0] dip);
    logic [31:0] s;
    s = 32'h4500 + 32'(totlen) + 32'h4000 + 32'h4011 +
        32'(sip[31:16]) + 32'(sip[15:0]) + 32'(dip[31:16]) + 32'(dip[15:0]);
    s = 32'(s[15:0]) + 32'(s[31:16]);
    s = 32'(s[15:0]) + 32'(s[31:16]);
    return ~s[15:0];
  endfunction

  logic [31:0] hword;
  always_comb begin
    unique case (w)
      4'd0:  hword = {16'h0000, cfg_dst_mac[47:32]};
      4'd1:  hword = cfg_dst_mac[31:0];
      4'd2:  hword = cfg_src_mac[47:16];
      4'd3:  hword = {cfg_src_mac[15:0], nanet_pkg::ETHTYPE_IPV4};
      4'd4:  hword = {16'h4500, len + 16'd28};
      4'd5:  hword = 32'h0000_4000;
      4'd6:  hword = {8'd64, nanet_pkg::IPPROTO_UDP, ip_csum(len + 16'd28, cfg_src_ip, cfg_dst_ip)};
      4'd7:  hword = cfg_src_ip;
      4'd8:  hword = cfg_dst_ip;
      4'd9:  hword = {cfg_src_port, dport};
      default: hword = {len + 16'd8, 16'h0000};
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE; w <= '0; len <= '0; dport <= '0;
      tx_valid <= 1'b0; tx_data <= '0; tx_sop <= 1'b0; tx_eop <= 1'b0; tx_empty <= '0;
      cnt_frames <= '0;
    end else begin
      if (tx_valid && tx_ready) tx_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (pl_valid && pl_sop) begin
          len   <= pl_len;
          dport <= (pl_tag != '0) ? pl_tag : cfg_dst_port;
          w     <= '0;
          state <= S_HDR;
        end
        S_HDR: if (can_load) begin
          tx_valid <= 1'b1;
          tx_data  <= hword;
          tx_sop   <= w == 4'd0;
          tx_eop   <= 1'b0;
          tx_empty <= '0;
          w        <= w + 1'b1;
          if (w == 4'd10) state <= S_DATA;
        end
        S_DATA: if (pl_valid && can_load) begin
          tx_valid <= 1'b1;
          tx_data  <= pl_data;
          tx_sop   <= 1'b0;
          tx_eop   <= pl_eop;
          tx_empty <= pl_eop ? pl_empty : 2'd0;
          if (pl_eop) begin
            state      <= S_IDLE;
            cnt_frames <= cnt_frames + 1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    tx_valid && !tx_ready |=> tx_valid && $stable(tx_data));
endmodule
