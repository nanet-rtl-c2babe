// udp_offloader: receive-side UDP/IP protocol offload of the GbE channel.
//
// Frames arrive from the Ethernet MAC on a 32-bit Avalon-ST stream (first
// byte in bits 31:24). The MAC is assumed to run with its 16-bit receive
// shift enabled, so two pad bytes precede the destination MAC address and
// the 42-byte Ethernet+IPv4+UDP header ends on a word boundary: words 0-10
// are header, the UDP payload starts at word 11. While the header streams by
// the block checks EtherType = IPv4, version 4 with a 20-byte header (no
// options), protocol = UDP, the destination IP (if enabled) and the UDP
// destination port. A frame failing any check is discarded and counted;
// a matching frame has its payload forwarded on a 32-bit stream, cut
// through, with the payload byte count and UDP ports presented with the first
// word. The payload length comes from the UDP length field, so Ethernet
// minimum-size padding is stripped; a frame that ends early closes the
// payload stream at its last word.
//
// Timing: one output register; one word per clock with no bubbles, i.e. at
// 200 MHz the 6.4 Gbps the paper quotes for the 32-bit channel. The whole
// block stalls when the output is not ready. The checksum fields and the
// MAC's error flag are not examined (a cut-through forwarder cannot retract
// words already sent). The paper gives the block's function (payload
// extraction, 32-bit channel, Avalon-ST input); the header checks, the
// 16-bit shift and the framing are this design's own.
module udp_offloader (
  input  logic        clk,
  input  logic        rst_n,
  // configuration
  input  logic [15:0] cfg_udp_port,
  input  logic [31:0] cfg_ip,
  input  logic        cfg_ip_check,
  // Avalon-ST from the MAC
  input  logic [31:0] rx_data,
  input  logic        rx_valid,
  input  logic        rx_sop,
  input  logic        rx_eop,
  input  logic [1:0]  rx_empty,
  output logic        rx_ready,
  // UDP payload stream
  output logic [31:0] pl_data,
  output logic        pl_valid,
  output logic        pl_sop,
  output logic        pl_eop,
  output logic [1:0]  pl_empty,
  output logic [15:0] pl_len,      // payload bytes, valid with pl_sop
  output logic [15:0] pl_sport,
  output logic [15:0] pl_dport,
  input  logic        pl_ready,
  // statistics
  output logic [31:0] cnt_frames,  // datagrams forwarded
  output logic [31:0] cnt_dropped  // frames discarded
);
  localparam int HDR_WORDS = 11;

  logic [3:0]  wcnt;          // word index inside the frame, saturates
  logic        in_frame;
  logic        drop;          // current frame failed a check
  logic [15:0] remain;        // payload bytes still to forward
  logic        first;         // next payload word is the first
  logic [15:0] sport, dport;
  logic        emitted;       // some payload of this frame already sent

  logic        adv;           // an input word is taken this cycle
  assign rx_ready = !pl_valid || pl_ready;
  assign adv      = rx_valid && rx_ready;

  // header check on the word now on the input
  logic        bad;
  logic [3:0]  idx;
  assign idx = rx_sop ? 4'd0 : wcnt;
  always_comb begin
    bad = 1'b0;
    unique case (idx)
      4'd3:  bad = rx_data[15:0] != nanet_pkg::ETHTYPE_IPV4;
      4'd4:  bad = rx_data[31:24] != 8'h45;
      4'd6:  bad = rx_data[23:16] != nanet_pkg::IPPROTO_UDP;
      4'd8:  bad = cfg_ip_check && (rx_data != cfg_ip);
      4'd9:  bad = rx_data[15:0] != cfg_udp_port;
      4'd10: bad = rx_data[31:16] <= 16'd8;     // empty or malformed datagram
      default: bad = 1'b0;
    endcase
  end

  logic payload_word;
  assign payload_word = !rx_sop && in_frame && wcnt == 4'(HDR_WORDS) && !drop && remain != 0;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wcnt <= '0; in_frame <= 1'b0; drop <= 1'b0; remain <= '0; first <= 1'b0;
      sport <= '0; dport <= '0; emitted <= 1'b0;
      pl_valid <= 1'b0; pl_data <= '0; pl_sop <= 1'b0; pl_eop <= 1'b0; pl_empty <= '0;
      pl_len <= '0; pl_sport <= '0; pl_dport <= '0;
      cnt_frames <= '0; cnt_dropped <= '0;
    end else begin
      if (pl_valid && pl_ready) pl_valid <= 1'b0;
      if (adv) begin
        if (rx_sop) begin
          in_frame <= !rx_eop;
          wcnt     <= 4'd1;
          drop     <= 1'b0;
          emitted  <= 1'b0;
          remain   <= '0;
          if (rx_eop) cnt_dropped <= cnt_dropped + 1;   // runt
        end else if (in_frame) begin
          if (wcnt != 4'(HDR_WORDS)) wcnt <= wcnt + 1;
          if (bad && !drop) drop <= 1'b1;
          if (wcnt == 4'd9)  begin sport <= rx_data[31:16]; dport <= rx_data[15:0]; end
          if (wcnt == 4'd10) begin remain <= rx_data[31:16] - 16'd8; first <= 1'b1; end
          if (payload_word) begin
            pl_valid <= 1'b1;
            pl_data  <= rx_data;
            pl_sop   <= first;
            first    <= 1'b0;
            emitted  <= 1'b1;
            if (first) begin
              pl_len   <= remain;
              pl_sport <= sport;
              pl_dport <= dport;
            end
            if (remain <= 16'd4 || rx_eop) begin
              pl_eop   <= 1'b1;
              pl_empty <= (remain <= 16'd4) ? 2'(16'd4 - remain) : rx_empty;
              remain   <= '0;
              cnt_frames <= cnt_frames + 1;
            end else begin
              pl_eop   <= 1'b0;
              pl_empty <= '0;
              remain   <= remain - 16'd4;
            end
          end
          if (rx_eop) begin
            in_frame <= 1'b0;
            // header-only, truncated or rejected frames
            if (!emitted && !payload_word) cnt_dropped <= cnt_dropped + 1;
          end
        end
      end
    end
  end

  // the payload stream must not change while it is stalled
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      pl_valid && !pl_ready |=> pl_valid && $stable(pl_data) && $stable(pl_eop);
  endproperty
  a_hold: assert property (p_hold);

endmodule
