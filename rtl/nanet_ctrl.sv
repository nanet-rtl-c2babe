// nanet_ctrl: NaNet Controller, receive direction (APEnet protocol encoder).
//
// Turns each UDP datagram payload coming from the UDP offloader (32-bit
// words, byte length given with the first word) into an APEnet+ packet for
// the router: first a header flit carrying the destination router port
// (cfg_dst_port, normally the Network Interface port), this channel's own
// port number, the payload length and the UDP destination port as tag; then
// the payload packed four words per 128-bit flit, word k of a flit in bits
// 32k+31:32k with its bytes reversed, so that payload byte b lies in flit
// bits 8b+7:8b and lands in memory in arrival order. The last flit
// is zero-padded and carries eop.
//
// Timing: one output register. The header costs one cycle before the first
// payload word is taken; afterwards a flit leaves every fourth input word, so
// the 32-bit channel runs at full rate. Backpressure from the router stalls
// the input. The paper gives the function (UDP-encapsulated data translated
// into APEnet+ packets); the header layout and packing order are this
// design's choice.
module nanet_ctrl
  import nanet_pkg::*;
#(
  parameter logic [PORT_W-1:0] MY_PORT = 4'd1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [PORT_W-1:0] cfg_dst_port,
  // payload stream from the offloader
  input  logic [31:0]       pl_data,
  input  logic              pl_valid,
  input  logic              pl_sop,
  input  logic              pl_eop,
  input  logic [15:0]       pl_len,
  input  logic [15:0]       pl_dport,
  output logic              pl_ready,
  // APEnet+ flits to the router
  output flit_t             out_flit,
  output logic              out_valid,
  input  logic              out_ready
);
  typedef enum logic {S_HDR, S_DATA} state_t;
  state_t      state;
  logic [1:0]  cnt;
  logic [2:0][31:0] acc;
  logic        can_load, take, flush;

  assign can_load = !out_valid || out_ready;
  // a word that completes a flit can only be taken if the output can load
  assign pl_ready = (state == S_DATA) && ((cnt != 2'd3 && !pl_eop) || can_load);
  assign take     = pl_valid && pl_ready;
  assign flush    = take && (cnt == 2'd3 || pl_eop);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_HDR; cnt <= '0; acc <= '0;
      out_valid <= 1'b0; out_flit <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      unique case (state)
        S_HDR: if (pl_valid && pl_sop && can_load) begin
          out_valid     <= 1'b1;
          out_flit.sop  <= 1'b1;
          out_flit.eop  <= 1'b0;
          out_flit.data <= make_hdr(cfg_dst_port, MY_PORT, pl_len, pl_dport);
          state         <= S_DATA;
          cnt           <= '0;
        end
        S_DATA: if (take) begin
          if (flush) begin
            logic [3:0][31:0] f;
            f = '0;
            for (int k = 0; k < 3; k++) if (k < int'(cnt)) f[k] = acc[k];
            f[cnt] = bswap32(pl_data);
            out_valid     <= 1'b1;
            out_flit.sop  <= 1'b0;
            out_flit.eop  <= pl_eop;
            out_flit.data <= f;
            cnt           <= '0;
            if (pl_eop) state <= S_HDR;
          end else begin
            acc[cnt] <= bswap32(pl_data);
            cnt      <= cnt + 1;
          end
        end
        default: state <= S_HDR;
      endcase
    end
  end

  // a packet must start with a payload word flagged sop
  a_sop: assert property (@(posedge clk) disable iff (!rst_n)
           state == S_HDR && pl_valid |-> pl_sop);
endmodule
