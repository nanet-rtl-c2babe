// tx_block: transmit side of the Network Interface.
//
// The host posts a transmit command (destination router port, payload length
// in bytes, a 16-bit tag) and the PCIe core delivers the payload as 16-byte
// beats read from host or GPU memory. The block sends the APEnet+ header flit
// for the command, then ceil(len/16) payload flits taken one-to-one from the
// data beats, the last with eop (a zero-length command gives a header-only
// packet with eop on the header). The source-port field is MY_PORT, the
// router port the Network Interface sits on.
//
// Timing: registered output; the header leaves the cycle after the command
// is accepted, then one flit per clock while data beats are available and
// the router is ready. The paper gives the function (gathering data from the
// PCIe port and forwarding it to router destination ports); the command
// format and beat interface are this design's own, standing in for the
// commercial PCIe core's DMA engines.
module tx_block
  import nanet_pkg::*;
#(
  parameter logic [PORT_W-1:0] MY_PORT = 4'd0
) (
  input  logic               clk,
  input  logic               rst_n,
  // transmit command
  input  logic               cmd_valid,
  input  logic [PORT_W-1:0]  cmd_dst_port,
  input  logic [BYTES_W-1:0] cmd_len,
  input  logic [15:0]        cmd_tag,
  output logic               cmd_ready,
  // payload beats from the PCIe core
  input  logic [FLIT_W-1:0]  h_data,
  input  logic               h_valid,
  output logic               h_ready,
  // APEnet+ flits to the router
  output flit_t              out_flit,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [31:0]        cnt_pkts
);
  typedef enum logic {S_CMD, S_DATA} state_t;
  state_t             state;
  logic [BYTES_W-1:0] left;     // payload flits still to send
  logic               can_load;

  assign can_load  = !out_valid || out_ready;
  assign cmd_ready = state == S_CMD && can_load;
  assign h_ready   = state == S_DATA && can_load;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_CMD; left <= '0; out_valid <= 1'b0; out_flit <= '0; cnt_pkts <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (cmd_valid && cmd_ready) begin
        out_valid     <= 1'b1;
        out_flit.sop  <= 1'b1;
        out_flit.eop  <= cmd_len == '0;
        out_flit.data <= make_hdr(cmd_dst_port, MY_PORT, cmd_len, cmd_tag);
        left          <= BYTES_W'(nflits(cmd_len));
        if (cmd_len == '0) cnt_pkts <= cnt_pkts + 1;
        else               state    <= S_DATA;
      end
      if (h_valid && h_ready) begin
        out_valid     <= 1'b1;
        out_flit.sop  <= 1'b0;
        out_flit.eop  <= left == BYTES_W'(1);
        out_flit.data <= h_data;
        left          <= left - 1'b1;
        if (left == BYTES_W'(1)) begin
          state    <= S_CMD;
          cnt_pkts <= cnt_pkts + 1;
        end
      end
    end
  end
endmodule
