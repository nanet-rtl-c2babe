// nanet_pkg: types and constants shared by the NaNet-1 datapath.
//
// Inside the NIC every packet travels in the APEnet+ packet format: one
// header flit followed by payload flits, all FLIT_W bits wide, each flit
// tagged with start-of-packet and end-of-packet flags. The header carries
// the router destination port, the payload length in bytes and the source
// port. The paper names the APEnet+ encapsulation but gives no field layout,
// so the header layout below, the 128-bit flit width and the sop/eop
// side-band flags are choices of this design.
package nanet_pkg;

  localparam int FLIT_W   = 128;         // router / Network Interface word
  localparam int BYTES_W  = 16;          // payload length field, bytes
  localparam int PORT_W   = 4;           // router port number field
  localparam int ADDR_W   = 64;          // PCIe/GPU bus address

  typedef struct packed {
    logic              sop;
    logic              eop;
    logic [FLIT_W-1:0] data;
  } flit_t;

  // Header flit layout (data field of the sop flit).
  typedef struct packed {
    logic [FLIT_W-1-PORT_W-PORT_W-BYTES_W-16:0] rsvd;
    logic [15:0]        tag;      // e.g. UDP destination port of the datagram
    logic [BYTES_W-1:0] len;      // payload bytes that follow the header
    logic [PORT_W-1:0]  src_port; // router port the packet entered on
    logic [PORT_W-1:0]  dst_port; // router port the packet must leave on
  } apenet_hdr_t;

  function automatic logic [FLIT_W-1:0] make_hdr(logic [PORT_W-1:0] dst,
                                                 logic [PORT_W-1:0] src,
                                                 logic [BYTES_W-1:0] len,
                                                 logic [15:0] tag);
    apenet_hdr_t h;
    h = '0;
    h.dst_port = dst;
    h.src_port = src;
    h.len      = len;
    h.tag      = tag;
    return h;
  endfunction

  // Number of FLIT_W payload flits for a payload of len bytes.
  function automatic int unsigned nflits(logic [BYTES_W-1:0] len);
    return (int'(len) + FLIT_W/8 - 1) / (FLIT_W/8);
  endfunction

  // The MAC streams put the first byte of a word in bits 31:24; in a flit,
  // and in memory, byte b of the payload sits in bits 8b+7:8b. Words cross
  // between the two with their bytes reversed.
  function automatic logic [31:0] bswap32(logic [31:0] w);
    return {w[7:0], w[15:8], w[23:16], w[31:24]};
  endfunction

  localparam logic [15:0] ETHTYPE_IPV4 = 16'h0800;
  localparam logic [7:0]  IPPROTO_UDP  = 8'd17;

endpackage
