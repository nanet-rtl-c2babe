// nanet1_top: NaNet-1, a PCIe network interface that delivers UDP data
// arriving on Gigabit Ethernet straight into GPU (or host) memory buffers
// without software on the data path, and that also switches packets among
// three APElink channels.
//
// Structure (router port numbers in brackets):
//   GbE MAC --Avalon-ST--> udp_offloader -> nanet_ctrl  -> router [1]
//   router [1] -> nanet_ctrl_tx -> udp_tx --Avalon-ST--> GbE MAC
//   APElink channels 0..NAPE-1 <--flits--> router [2..NAPE+1]   (top ports)
//   router [0] -> rx_block -> write requests to the PCIe core   (top ports)
//                 rx_block <-> gpu_io_accel (receive buffer list, events)
//   PCIe core (commands + data beats) -> tx_block -> router [0]
// The Ethernet MAC, the APElink link layers, the PCIe core and the
// microcontroller that configures the card are outside this module: their
// sides are ports.
//
// Configuration is a simple register write bus (cfg_we/cfg_addr/cfg_wdata),
// as the microcontroller would drive it:
//   0x00 UDP port accepted on receive      0x01 local IP address
//   0x02 bit 0: check destination IP       0x03 router port UDP payload goes to
//   0x04 local MAC   0x05 remote MAC       0x06 remote IP
//   0x07 UDP source port on transmit       0x08 default UDP destination port
//   0x09 number of receive buffers in the circular list
//   0x10 staging: buffer bus address
//   0x11 commit buffer: wdata[31:0] size, [47:32] index, [63] GPU memory
// The router port numbers, the register map and the reset values (UDP port
// 0, to router port 0, no buffers) are this design's own.
//
// Timing: a UDP payload word reaches the router 2 cycles after the
// MAC presents it, and the first write request leaves about 5 cycles after
// the header flit enters the router, with no software involvement; the
// latency is fixed for a given packet length and buffer state. A buffer
// event is raised only after the last write of the buffer's data has been
// accepted (rx_block reports it to gpu_io_accel), so software that sees the
// event is never ahead of the data.
module nanet1_top
  import nanet_pkg::*;
#(
  parameter int NAPE       = 3,   // APElink channels
  parameter int NBUF       = 16,  // entries of the receive buffer list
  parameter int FIFO_DEPTH = 4    // router input FIFO, flits
) (
  input  logic        clk,
  input  logic        rst_n,
  // configuration bus (microcontroller)
  input  logic        cfg_we,
  input  logic [7:0]  cfg_addr,
  input  logic [63:0] cfg_wdata,
  // GbE MAC receive stream
  input  logic [31:0] mac_rx_data,
  input  logic        mac_rx_valid,
  input  logic        mac_rx_sop,
  input  logic        mac_rx_eop,
  input  logic [1:0]  mac_rx_empty,
  output logic        mac_rx_ready,
  // GbE MAC transmit stream
  output logic [31:0] mac_tx_data,
  output logic        mac_tx_valid,
  output logic        mac_tx_sop,
  output logic        mac_tx_eop,
  output logic [1:0]  mac_tx_empty,
  input  logic        mac_tx_ready,
  // APElink channels
  input  flit_t       ape_in_flit  [NAPE],
  input  logic        ape_in_valid [NAPE],
  output logic        ape_in_ready [NAPE],
  output flit_t       ape_out_flit [NAPE],
  output logic        ape_out_valid[NAPE],
  input  logic        ape_out_ready[NAPE],
  // PCIe core: transmit commands and payload beats
  input  logic               tx_cmd_valid,
  input  logic [PORT_W-1:0]  tx_cmd_dst_port,
  input  logic [BYTES_W-1:0] tx_cmd_len,
  input  logic [15:0]        tx_cmd_tag,
  output logic               tx_cmd_ready,
  input  logic [FLIT_W-1:0]  tx_data,
  input  logic               tx_data_valid,
  output logic               tx_data_ready,
  // PCIe core: RDMA write requests
  output logic               wr_valid,
  output logic [ADDR_W-1:0]  wr_addr,
  output logic [FLIT_W-1:0]  wr_data,
  output logic [FLIT_W/8-1:0] wr_be,
  output logic               wr_gpu,
  output logic               wr_last,
  input  logic               wr_ready,
  // buffer-complete events to the host
  output logic               evt_valid,
  output logic [$clog2(NBUF)-1:0] evt_idx,
  output logic [ADDR_W-1:0]  evt_addr,
  output logic [31:0]        evt_bytes,
  output logic               evt_gpu,
  // statistics
  output logic [31:0]        st_udp_frames,
  output logic [31:0]        st_udp_dropped,
  output logic [31:0]        st_rx_pkts,
  output logic [31:0]        st_rx_dropped,
  output logic [31:0]        st_tx_pkts,
  output logic [31:0]        st_udp_tx_frames,
  output logic [31:0]        st_buffers,
  output logic [31:0]        st_misrouted
);
  localparam int NPORTS  = NAPE + 2;
  localparam int P_NI    = 0;
  localparam int P_GBE   = 1;
  localparam int P_APE   = 2;

  // ---------------- configuration registers ----------------
  logic [15:0]       r_udp_port, r_src_port, r_dst_port;
  logic [31:0]       r_ip, r_dst_ip;
  logic              r_ip_check;
  logic [PORT_W-1:0] r_rx_dst;
  logic [47:0]       r_mac, r_dst_mac;
  logic [$clog2(NBUF):0] r_nbuf;
  logic [ADDR_W-1:0] r_stage_addr;
  logic              tbl_we;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      r_udp_port <= '0; r_ip <= '0; r_ip_check <= 1'b0; r_rx_dst <= PORT_W'(P_NI);
      r_mac <= '0; r_dst_mac <= '0; r_dst_ip <= '0; r_src_port <= '0; r_dst_port <= '0;
      r_nbuf <= '0; r_stage_addr <= '0;
    end else if (cfg_we) begin
      unique case (cfg_addr)
        8'h00: r_udp_port   <= cfg_wdata[15:0];
        8'h01: r_ip         <= cfg_wdata[31:0];
        8'h02: r_ip_check   <= cfg_wdata[0];
        8'h03: r_rx_dst     <= cfg_wdata[PORT_W-1:0];
        8'h04: r_mac        <= cfg_wdata[47:0];
        8'h05: r_dst_mac    <= cfg_wdata[47:0];
        8'h06: r_dst_ip     <= cfg_wdata[31:0];
        8'h07: r_src_port   <= cfg_wdata[15:0];
        8'h08: r_dst_port   <= cfg_wdata[15:0];
        8'h09: r_nbuf       <= cfg_wdata[$clog2(NBUF):0];
        8'h10: r_stage_addr <= cfg_wdata[ADDR_W-1:0];
        default: ;
      endcase
    end
  end
  assign tbl_we = cfg_we && cfg_addr == 8'h11;

  // ---------------- router ----------------
  flit_t r_in_flit [NPORTS];
  logic  r_in_valid[NPORTS];
  logic  r_in_ready[NPORTS];
  flit_t r_out_flit [NPORTS];
  logic  r_out_valid[NPORTS];
  logic  r_out_ready[NPORTS];

  router #(.NPORTS(NPORTS), .DEPTH(FIFO_DEPTH)) u_router (
    .clk, .rst_n,
    .in_flit(r_in_flit), .in_valid(r_in_valid), .in_ready(r_in_ready),
    .out_flit(r_out_flit), .out_valid(r_out_valid), .out_ready(r_out_ready),
    .cnt_misrouted(st_misrouted));

  for (genvar a = 0; a < NAPE; a++) begin : g_ape
    assign r_in_flit[P_APE+a]   = ape_in_flit[a];
    assign r_in_valid[P_APE+a]  = ape_in_valid[a];
    assign ape_in_ready[a]      = r_in_ready[P_APE+a];
    assign ape_out_flit[a]      = r_out_flit[P_APE+a];
    assign ape_out_valid[a]     = r_out_valid[P_APE+a];
    assign r_out_ready[P_APE+a] = ape_out_ready[a];
  end

  // ---------------- GbE channel, receive ----------------
  logic [31:0] u_data;
  logic        u_valid, u_sop, u_eop, u_ready;
  logic [1:0]  u_empty;
  logic [15:0] u_len, u_sport, u_dport;

  udp_offloader u_udp_rx (
    .clk, .rst_n,
    .cfg_udp_port(r_udp_port), .cfg_ip(r_ip), .cfg_ip_check(r_ip_check),
    .rx_data(mac_rx_data), .rx_valid(mac_rx_valid), .rx_sop(mac_rx_sop),
    .rx_eop(mac_rx_eop), .rx_empty(mac_rx_empty), .rx_ready(mac_rx_ready),
    .pl_data(u_data), .pl_valid(u_valid), .pl_sop(u_sop), .pl_eop(u_eop),
    .pl_empty(u_empty), .pl_len(u_len), .pl_sport(u_sport), .pl_dport(u_dport),
    .pl_ready(u_ready),
    .cnt_frames(st_udp_frames), .cnt_dropped(st_udp_dropped));

  nanet_ctrl #(.MY_PORT(PORT_W'(P_GBE))) u_ctrl_rx (
    .clk, .rst_n, .cfg_dst_port(r_rx_dst),
    .pl_data(u_data), .pl_valid(u_valid), .pl_sop(u_sop), .pl_eop(u_eop),
    .pl_len(u_len), .pl_dport(u_dport), .pl_ready(u_ready),
    .out_flit(r_in_flit[P_GBE]), .out_valid(r_in_valid[P_GBE]), .out_ready(r_in_ready[P_GBE]));

  // ---------------- GbE channel, transmit ----------------
  logic [31:0] d_data;
  logic        d_valid, d_sop, d_eop, d_ready;
  logic [1:0]  d_empty;
  logic [15:0] d_len, d_tag;

  nanet_ctrl_tx u_ctrl_tx (
    .clk, .rst_n,
    .in_flit(r_out_flit[P_GBE]), .in_valid(r_out_valid[P_GBE]), .in_ready(r_out_ready[P_GBE]),
    .pl_data(d_data), .pl_valid(d_valid), .pl_sop(d_sop), .pl_eop(d_eop),
    .pl_empty(d_empty), .pl_len(d_len), .pl_tag(d_tag), .pl_ready(d_ready));

  udp_tx u_udp_tx (
    .clk, .rst_n,
    .cfg_src_mac(r_mac), .cfg_dst_mac(r_dst_mac), .cfg_src_ip(r_ip), .cfg_dst_ip(r_dst_ip),
    .cfg_src_port(r_src_port), .cfg_dst_port(r_dst_port),
    .pl_data(d_data), .pl_valid(d_valid), .pl_sop(d_sop), .pl_eop(d_eop),
    .pl_empty(d_empty), .pl_len(d_len), .pl_tag(d_tag), .pl_ready(d_ready),
    .tx_data(mac_tx_data), .tx_valid(mac_tx_valid), .tx_sop(mac_tx_sop),
    .tx_eop(mac_tx_eop), .tx_empty(mac_tx_empty), .tx_ready(mac_tx_ready),
    .cnt_frames(st_udp_tx_frames));

  // ---------------- Network Interface ----------------
  tx_block #(.MY_PORT(PORT_W'(P_NI))) u_tx (
    .clk, .rst_n,
    .cmd_valid(tx_cmd_valid), .cmd_dst_port(tx_cmd_dst_port), .cmd_len(tx_cmd_len),
    .cmd_tag(tx_cmd_tag), .cmd_ready(tx_cmd_ready),
    .h_data(tx_data), .h_valid(tx_data_valid), .h_ready(tx_data_ready),
    .out_flit(r_in_flit[P_NI]), .out_valid(r_in_valid[P_NI]), .out_ready(r_in_ready[P_NI]),
    .cnt_pkts(st_tx_pkts));

  logic               a_req, a_gnt, a_drop, a_gpu, a_done;
  logic [BYTES_W-1:0] a_len;
  logic [ADDR_W-1:0]  a_addr;

  rx_block u_rx (
    .clk, .rst_n,
    .in_flit(r_out_flit[P_NI]), .in_valid(r_out_valid[P_NI]), .in_ready(r_out_ready[P_NI]),
    .alloc_req(a_req), .alloc_len(a_len), .alloc_gnt(a_gnt), .alloc_drop(a_drop),
    .alloc_addr(a_addr), .alloc_gpu(a_gpu),
    .wr_valid, .wr_addr, .wr_data, .wr_be, .wr_gpu, .wr_last, .wr_ready, .pkt_done(a_done),
    .cnt_pkts(st_rx_pkts), .cnt_dropped(st_rx_dropped));

  gpu_io_accel #(.NBUF(NBUF)) u_gpu (
    .clk, .rst_n,
    .tbl_we, .tbl_idx(cfg_wdata[32 +: $clog2(NBUF)]), .tbl_addr(r_stage_addr),
    .tbl_size(cfg_wdata[31:0]), .tbl_gpu(cfg_wdata[63]), .cfg_nbuf(r_nbuf),
    .alloc_req(a_req), .alloc_len(a_len), .pkt_done(a_done), .alloc_gnt(a_gnt), .alloc_drop(a_drop),
    .alloc_addr(a_addr), .alloc_gpu(a_gpu),
    .evt_valid, .evt_idx, .evt_addr, .evt_bytes, .evt_gpu,
    .cnt_buffers(st_buffers));
endmodule
