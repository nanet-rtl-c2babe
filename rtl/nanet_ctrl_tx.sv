// nanet_ctrl_tx: NaNet Controller, transmit direction (APEnet protocol
// decoder).
//
// Takes outbound APEnet+ packets from the GbE channel's router port, strips
// the header and unpacks each 128-bit payload flit into four 32-bit words
// (word k from bits 32k+31:32k, bytes reversed so the first payload byte
// leaves in bits 31:24, the inverse of nanet_ctrl's packing). Only
// ceil(len/4) words are sent, so flit padding is dropped; the first word
// carries sop together with the payload length and the header tag (used by
// the UDP encapsulator as destination port), the last carries eop and the
// count of unused bytes. A zero-length packet produces nothing.
//
// Timing: registered output, one word per clock; a flit is read from the
// router when its last word is sent, so the 128-bit router port is used at a
// quarter of its rate, which is far above GbE. The paper states only that
// outbound APEnet+ packets are decapsulated before their payload is
// re-encapsulated in the channel's transport protocol; the rest is this
// design's own.
module nanet_ctrl_tx
  import nanet_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  flit_t       in_flit,
  input  logic        in_valid,
  output logic        in_ready,
  output logic [31:0] pl_data,
  output logic        pl_valid,
  output logic        pl_sop,
  output logic        pl_eop,
  output logic [1:0]  pl_empty,
  output logic [15:0] pl_len,
  output logic [15:0] pl_tag,
  input  logic        pl_ready
);
  typedef enum logic {S_HDR, S_DATA} state_t;
  state_t        state;
  logic [15:0]   words_left;    // payload words still to send
  logic [1:0]    k;             // word index inside the current flit
  logic          first;
  logic [15:0]   len, tag;
  logic          can_load, last_in_flit, send;
  apenet_hdr_t   hdr;

  assign hdr          = apenet_hdr_t'(in_flit.data);
  assign can_load     = !pl_valid || pl_ready;
  assign send         = state == S_DATA && in_valid && can_load;
  assign last_in_flit = k == 2'd3 || words_left == 16'd1;
  assign in_ready     = (state == S_HDR) || (state == S_DATA && can_load && last_in_flit);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_HDR; words_left <= '0; k <= '0; first <= 1'b0; len <= '0; tag <= '0;
      pl_valid <= 1'b0; pl_data <= '0; pl_sop <= 1'b0; pl_eop <= 1'b0; pl_empty <= '0;
      pl_len <= '0; pl_tag <= '0;
    end else begin
      if (pl_valid && pl_ready) pl_valid <= 1'b0;
      if (state == S_HDR && in_valid) begin
        // header flit (or a stray payload flit, which is discarded)
        if (in_flit.sop && !in_flit.eop && hdr.len != '0) begin
          state      <= S_DATA;
          words_left <= (hdr.len + 16'd3) >> 2;
          len        <= hdr.len;
          tag        <= hdr.tag;
          k          <= '0;
          first      <= 1'b1;
        end
      end
      if (send) begin
        pl_valid <= 1'b1;
        pl_data  <= bswap32(in_flit.data[32*k +: 32]);
        pl_sop   <= first;
        pl_len   <= len;
        pl_tag   <= tag;
        first    <= 1'b0;
        pl_eop   <= words_left == 16'd1;
        pl_empty <= words_left == 16'd1 ? 2'((16'd4 - (len & 16'd3)) & 16'd3) : 2'd0;
        words_left <= words_left - 1'b1;
        k        <= k + 1'b1;
        if (last_in_flit) k <= '0;
        if (words_left == 16'd1) state <= S_HDR;
      end
    end
  end

  // every payload flit is fully read before the packet ends
  a_eop: assert property (@(posedge clk) disable iff (!rst_n)
    send && words_left == 16'd1 |-> in_flit.eop);
endmodule
