// rx_block: receive side of the Network Interface.
//
// Takes APEnet+ packets from the router's Network Interface port. For each
// header flit it requests room from the GPU I/O accelerator with the
// payload length; on grant the header is consumed and each payload flit
// becomes one RDMA write request to the PCIe core: a 16-byte data beat, its
// bus address (incrementing by 16), byte enables (partial on the last beat),
// a GPU/host-memory flag and a last flag. A packet the accelerator refuses
// (alloc_drop) is read from the router and discarded.
//
// A new packet asks for room only once the write register is empty, and
// pkt_done pulses when the last write of a packet is accepted: together they
// let the allocator signal a full buffer only after all its data has left.
//
// Timing: the header is consumed in the cycle the allocation is granted,
// then one write beat per clock, registered, stalled by wr_ready. The paper
// gives the function (RDMA support for host and GPU on the receiving side);
// the write-request interface and its timing are this design's own, and
// stand in for the commercial PCIe core's DMA back end.
module rx_block
  import nanet_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // from the router
  input  flit_t              in_flit,
  input  logic               in_valid,
  output logic               in_ready,
  // to the GPU I/O accelerator
  output logic               alloc_req,
  output logic [BYTES_W-1:0] alloc_len,
  input  logic               alloc_gnt,
  input  logic               alloc_drop,
  input  logic [ADDR_W-1:0]  alloc_addr,
  input  logic               alloc_gpu,
  // write requests to the PCIe core
  output logic               wr_valid,
  output logic [ADDR_W-1:0]  wr_addr,
  output logic [FLIT_W-1:0]  wr_data,
  output logic [FLIT_W/8-1:0] wr_be,
  output logic               wr_gpu,
  output logic               wr_last,
  input  logic               wr_ready,
  output logic               pkt_done,
  output logic [31:0]        cnt_pkts,
  output logic [31:0]        cnt_dropped
);
  localparam int BPF = FLIT_W / 8;

  typedef enum logic {S_HDR, S_DATA} state_t;
  state_t             state;
  logic               drop;
  logic [ADDR_W-1:0]  addr;
  logic [BYTES_W-1:0] remain;
  logic               gpu;
  apenet_hdr_t        hdr;

  assign hdr       = apenet_hdr_t'(in_flit.data);
  assign alloc_req = state == S_HDR && in_valid && in_flit.sop && !wr_valid;
  assign pkt_done  = wr_valid && wr_ready && wr_last;
  assign alloc_len = hdr.len;

  always_comb begin
    if (state == S_HDR) in_ready = alloc_gnt;
    else                in_ready = drop || !wr_valid || wr_ready;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_HDR; drop <= 1'b0; addr <= '0; remain <= '0; gpu <= 1'b0;
      wr_valid <= 1'b0; wr_addr <= '0; wr_data <= '0; wr_be <= '0; wr_gpu <= 1'b0;
      wr_last <= 1'b0; cnt_pkts <= '0; cnt_dropped <= '0;
    end else begin
      if (wr_valid && wr_ready) wr_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (state == S_HDR) begin
          drop   <= alloc_drop;
          addr   <= alloc_addr;
          gpu    <= alloc_gpu;
          remain <= hdr.len;
          if (alloc_drop) cnt_dropped <= cnt_dropped + 1;
          else if (in_flit.eop) cnt_pkts <= cnt_pkts + 1;
          if (!in_flit.eop) state <= S_DATA;
        end else begin
          if (!drop) begin
            wr_valid <= 1'b1;
            wr_addr  <= addr;
            wr_data  <= in_flit.data;
            wr_gpu   <= gpu;
            wr_last  <= in_flit.eop;
            wr_be    <= (remain >= BYTES_W'(BPF)) ? '1 : BPF'((1 << remain) - 1);
            addr     <= addr + ADDR_W'(BPF);
            remain   <= (remain >= BYTES_W'(BPF)) ? remain - BYTES_W'(BPF) : '0;
            if (in_flit.eop) cnt_pkts <= cnt_pkts + 1;
          end
          if (in_flit.eop) state <= S_HDR;
        end
      end
    end
  end

  a_wr_hold: assert property (@(posedge clk) disable iff (!rst_n)
    wr_valid && !wr_ready |=> wr_valid && $stable(wr_addr) && $stable(wr_data));
endmodule
