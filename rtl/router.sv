// router: NaNet packet switch, a full crossbar between NPORTS ports.
//
// Every port is bidirectional: packets (header flit, payload flits, eop on the
// last) enter on in_*[p] and leave on out_*[p]. Each input has a DEPTH-flit
// FIFO. When a header reaches the head of an input FIFO, the routing stage
// reads the destination port field of the header and requests that output;
// the output's round-robin arbiter picks one of the requesting inputs and
// the output stays locked to it until the packet's eop flit has passed
// (wormhole switching), so packets are never interleaved on an output.
// Different outputs are served in parallel, which is what makes it a full
// crossbar. A header naming a port that does not exist makes the input
// discard that packet and count it.
//
// Timing: a flit written into an input FIFO can leave one cycle later; a
// grant takes one cycle after the header reaches the FIFO head; then one
// flit per clock per output. At the default 128-bit width and a 175 MHz clock
// one port moves 2.8 GB/s, the rate the paper quotes for the router's data
// flows (the clock frequency is an assumption). The paper says the number
// and width of ports and the routing algorithm are configurable and that the
// router has a switch plus routing and arbitration blocks; FIFO depth,
// destination-port routing and round-robin arbitration are this design's.
module router
  import nanet_pkg::*;
#(
  parameter int NPORTS = 5,
  parameter int DEPTH  = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  flit_t in_flit  [NPORTS],
  input  logic  in_valid [NPORTS],
  output logic  in_ready [NPORTS],
  output flit_t out_flit [NPORTS],
  output logic  out_valid[NPORTS],
  input  logic  out_ready[NPORTS],
  output logic [31:0] cnt_misrouted
);
  localparam int PW = $clog2(NPORTS);

  flit_t       h_flit [NPORTS];
  logic        h_valid[NPORTS];
  logic        h_pop  [NPORTS];

  for (genvar i = 0; i < NPORTS; i++) begin : g_in
    flit_fifo #(.DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .wr_flit(in_flit[i]), .wr_valid(in_valid[i]), .wr_ready(in_ready[i]),
      .rd_flit(h_flit[i]),  .rd_valid(h_valid[i]),  .rd_pop(h_pop[i]));
  end

  // ---------------- routing stage ----------------
  logic          granted [NPORTS];   // input currently owns an output
  logic          dropping[NPORTS];   // input is discarding a misrouted packet
  logic [PW-1:0] owner   [NPORTS];   // per output: input that owns it
  logic          busy    [NPORTS];   // per output
  logic [NPORTS-1:0] req [NPORTS];   // per output: request vector over inputs
  logic [NPORTS-1:0] gnt [NPORTS];
  logic [PORT_W-1:0] dest[NPORTS];   // per input: destination of head packet
  logic          hdr_bad [NPORTS];

  always_comb begin
    for (int i = 0; i < NPORTS; i++) begin
      apenet_hdr_t h;
      h = apenet_hdr_t'(h_flit[i].data);
      dest[i]    = h.dst_port;
      hdr_bad[i] = h_valid[i] && h_flit[i].sop && !granted[i] && !dropping[i] &&
                   int'(h.dst_port) >= NPORTS;
    end
    for (int o = 0; o < NPORTS; o++)
      for (int i = 0; i < NPORTS; i++)
        req[o][i] = !busy[o] && h_valid[i] && h_flit[i].sop && !granted[i] &&
                    !dropping[i] && int'(dest[i]) == o;
  end

  for (genvar o = 0; o < NPORTS; o++) begin : g_arb
    rr_arbiter #(.N(NPORTS)) u_arb (
      .clk, .rst_n, .req(req[o]), .advance(req[o] != '0), .gnt(gnt[o]));
  end

  // ---------------- switch ----------------
  always_comb begin
    for (int o = 0; o < NPORTS; o++) begin
      out_valid[o] = busy[o] && h_valid[owner[o]];
      out_flit[o]  = h_flit[owner[o]];
    end
  end

  always_comb begin
    for (int i = 0; i < NPORTS; i++) h_pop[i] = dropping[i] && h_valid[i];
    for (int o = 0; o < NPORTS; o++)
      if (busy[o] && h_valid[owner[o]] && out_ready[o]) h_pop[owner[o]] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int p = 0; p < NPORTS; p++) begin
        granted[p] <= 1'b0; dropping[p] <= 1'b0; busy[p] <= 1'b0; owner[p] <= '0;
      end
      cnt_misrouted <= '0;
    end else begin
      for (int o = 0; o < NPORTS; o++) begin
        if (busy[o] && out_valid[o] && out_ready[o] && out_flit[o].eop) begin
          busy[o] <= 1'b0;
          granted[owner[o]] <= 1'b0;
        end
        for (int i = 0; i < NPORTS; i++)
          if (gnt[o][i]) begin
            busy[o]    <= 1'b1;
            owner[o]   <= PW'(i);
            granted[i] <= 1'b1;
          end
      end
      for (int i = 0; i < NPORTS; i++) begin
        if (hdr_bad[i]) begin
          dropping[i]   <= 1'b1;
          cnt_misrouted <= cnt_misrouted + 1;
        end
        if (dropping[i] && h_valid[i] && h_flit[i].eop) dropping[i] <= 1'b0;
      end
    end
  end

  // an output never carries two packets at once: a granted output keeps its owner
  for (genvar o = 0; o < NPORTS; o++) begin : g_chk
    a_stable_owner: assert property (@(posedge clk) disable iff (!rst_n)
      busy[o] && !(out_valid[o] && out_ready[o] && out_flit[o].eop) |=> busy[o] && $stable(owner[o]));
  end
endmodule
