// gpu_io_accel: receive-buffer manager of the Network Interface (the "GPU
// I/O accelerator").
//
// The host registers a circular list of NBUF receive buffers, each with a
// bus address, a size in bytes and a flag telling whether it lives in GPU
// memory (GPUDirect peer-to-peer write) or in host memory. Incoming packets
// are laid out one after the other in the current buffer, each starting on a
// 16-byte (one flit) boundary. For every packet the RX block asks for room
// (alloc_req with the payload length) and gets, combinationally in the same
// cycle, the write address:
//   * packet fits in what is left of the current buffer -> grant, address =
//     base + fill level; if the buffer is now exactly full it is closed as
//     soon as the RX block reports the packet's last write (pkt_done), and
//     no other request is granted until then;
//   * packet does not fit but the buffer holds data -> the buffer is closed
//     as it is and the request is granted from the next buffer one cycle later;
//   * packet is larger than an empty buffer -> grant with alloc_drop set: the
//     RX block discards it;
//   * no buffer registered (cfg_nbuf = 0) -> no grant, the RX path stalls.
// The RX block asks for room only when its previous writes have left, so a
// buffer is never signalled before all of its data has been handed to the
// PCIe core. Closing a buffer raises evt_valid for one cycle with the buffer index,
// address and number of bytes written; this is the "buffer received" signal
// the application waits for. After buffer cfg_nbuf-1 the list wraps to 0.
//
// The paper says only that received data are streamed into a circular list
// of persistent buffers in GPU memory, consumed in order by the GPU kernel,
// and that a filled buffer is signalled to the application; the packing rule,
// the close-on-overflow rule, the drop rule and the table interface are this
// design's own. There is no handshake for the application giving a buffer
// back: the host must consume buffers faster than the list wraps.
module gpu_io_accel
  import nanet_pkg::*;
#(
  parameter int NBUF = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // buffer table writes (from the configuration registers)
  input  logic                    tbl_we,
  input  logic [$clog2(NBUF)-1:0] tbl_idx,
  input  logic [ADDR_W-1:0]       tbl_addr,
  input  logic [31:0]             tbl_size,
  input  logic                    tbl_gpu,
  input  logic [$clog2(NBUF):0]   cfg_nbuf,
  // allocation for one packet
  input  logic                    alloc_req,
  input  logic [BYTES_W-1:0]      alloc_len,
  input  logic                    pkt_done,     // last write of a packet accepted
  output logic                    alloc_gnt,
  output logic                    alloc_drop,
  output logic [ADDR_W-1:0]       alloc_addr,
  output logic                    alloc_gpu,
  // buffer-complete event
  output logic                    evt_valid,
  output logic [$clog2(NBUF)-1:0] evt_idx,
  output logic [ADDR_W-1:0]       evt_addr,
  output logic [31:0]             evt_bytes,
  output logic                    evt_gpu,
  output logic [31:0]             cnt_buffers
);
  localparam int IW = $clog2(NBUF);

  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic [31:0]       size;
    logic              gpu;
  } buf_t;

  buf_t        tbl [NBUF];
  logic [IW-1:0] ptr;
  logic [31:0] fill;
  buf_t        cur;
  logic [31:0] len16, next_fill;
  logic        close;
  logic        pend;          // buffer full, waiting for its last write

  assign cur       = tbl[ptr];
  assign len16     = (32'(alloc_len) + 32'd15) & ~32'd15;
  assign next_fill = fill + len16;

  always_comb begin
    alloc_gnt  = 1'b0;
    alloc_drop = 1'b0;
    close      = 1'b0;
    alloc_addr = cur.addr + ADDR_W'(fill);
    alloc_gpu  = cur.gpu;
    if (pend) begin
      close      = pkt_done;
    end else if (alloc_req && cfg_nbuf != '0) begin
      if (len16 > cur.size) begin
        alloc_gnt  = 1'b1;
        alloc_drop = 1'b1;
      end else if (next_fill <= cur.size) begin
        alloc_gnt  = 1'b1;
      end else begin
        close      = 1'b1;          // fill != 0 here, since len16 <= size
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ptr <= '0; fill <= '0; pend <= 1'b0; evt_valid <= 1'b0; evt_idx <= '0; evt_addr <= '0;
      evt_bytes <= '0; evt_gpu <= 1'b0; cnt_buffers <= '0;
    end else begin
      evt_valid <= 1'b0;
      if (alloc_gnt && !alloc_drop) begin
        fill <= next_fill;
        if (next_fill == cur.size) pend <= 1'b1;
      end
      if (close) begin
        evt_valid   <= 1'b1;
        evt_idx     <= ptr;
        evt_addr    <= cur.addr;
        evt_bytes   <= fill;
        pend        <= 1'b0;
        evt_gpu     <= cur.gpu;
        cnt_buffers <= cnt_buffers + 1;
        fill        <= '0;
        ptr         <= ((32'(ptr) + 1) >= 32'(cfg_nbuf)) ? '0 : ptr + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (tbl_we) tbl[tbl_idx] <= '{addr: tbl_addr, size: tbl_size, gpu: tbl_gpu};
  end

  a_fill: assert property (@(posedge clk) disable iff (!rst_n)
                           cfg_nbuf != '0 |-> fill <= cur.size);
endmodule
