// tb_nanet1_top: end-to-end test of the NaNet-1 card at its default size
// (3 APElink channels, 16-entry buffer list, 4-flit router FIFOs).
//
// The test configures the card over the register bus, registers a circular
// list of receive buffers (GPU and host memory) and then runs, at the same
// time:
//   * UDP/IP frames into the GbE receive stream, some of them for another
//     port or protocol, which must be filtered out;
//   * APEnet+ packets into APElink channel 0, most for the Network Interface
//     (so they compete with GbE traffic for the same router output), some for
//     APElink channel 1, one too large for any buffer, one for a port that
//     does not exist;
//   * host transmit commands: payloads to the GbE port, which must come out
//     as UDP frames, and to APElink channel 0.
// The PCIe write side, the MAC transmit side and the APElink outputs apply
// random backpressure. Every packet written to memory is reassembled from
// the write requests and compared with what its source sent (order kept per
// source); its start address and the buffer-complete events are compared
// with a model of the buffer list. Each mechanism of the design is counted
// and must have happened at least once. The latency from the last byte of a
// UDP frame to its last write request is checked against a worst-case bound
// (other traffic ahead in the router) and its mean against the idle pipeline.
module tb_nanet1_top;
  import nanet_pkg::*;
  localparam int NAPE = 3, NBUF = 16, NB_USED = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we = 0; logic [7:0] cfg_addr = 0; logic [63:0] cfg_wdata = 0;
  logic [31:0] mac_rx_data = 0; logic mac_rx_valid = 0, mac_rx_sop = 0, mac_rx_eop = 0, mac_rx_ready;
  logic [1:0] mac_rx_empty = 0;
  logic [31:0] mac_tx_data; logic mac_tx_valid, mac_tx_sop, mac_tx_eop, mac_tx_ready = 1; logic [1:0] mac_tx_empty;
  flit_t ape_in_flit[NAPE]; logic ape_in_valid[NAPE], ape_in_ready[NAPE];
  flit_t ape_out_flit[NAPE]; logic ape_out_valid[NAPE], ape_out_ready[NAPE];
  logic tx_cmd_valid = 0, tx_cmd_ready; logic [3:0] tx_cmd_dst_port = 0; logic [15:0] tx_cmd_len = 0, tx_cmd_tag = 0;
  logic [127:0] tx_data = 0; logic tx_data_valid = 0, tx_data_ready;
  logic wr_valid, wr_gpu, wr_last, wr_ready = 1; logic [63:0] wr_addr; logic [127:0] wr_data; logic [15:0] wr_be;
  logic evt_valid, evt_gpu; logic [3:0] evt_idx; logic [63:0] evt_addr; logic [31:0] evt_bytes;
  logic [31:0] st_udp_frames, st_udp_dropped, st_rx_pkts, st_rx_dropped, st_tx_pkts, st_udp_tx_frames,
               st_buffers, st_misrouted;

  nanet1_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  typedef byte unsigned bytes_t[$];
  localparam logic [15:0] MYPORT = 16'd50000;
  localparam logic [31:0] MYIP = 32'hC0A8_0102;

  // ---------------- expected data ----------------
  bytes_t exp_gbe[$];     // UDP payloads expected in memory, in order
  bytes_t exp_ape[$];     // APElink payloads expected in memory, in order
  bytes_t exp_ape1[$];    // APElink ch0 -> ch1 payloads
  bytes_t exp_ape0[$];    // host -> APElink ch0 payloads
  bytes_t exp_udp_out[$]; // host -> GbE payloads
  logic [63:0] b_addr[NB_USED]; int b_size[NB_USED]; bit b_gpu[NB_USED];

  // mechanism counters
  int m_conflict = 0, m_wr_stall = 0, m_rx_stall = 0, m_wrap = 0, m_partial = 0, m_full = 0;
  int m_mem_gbe = 0, m_mem_ape = 0, m_ape_switch = 0, m_udp_out = 0, m_ape_out = 0, m_gpu_wr = 0, m_host_wr = 0;
  int done_gbe = 0, done_ape = 0, done_host = 0;
  int n_bad_frames = 0;

  function automatic bytes_t rand_bytes(int n);
    bytes_t b; for (int i = 0; i < n; i++) b.push_back(8'($urandom)); return b;
  endfunction

  // ---------------- configuration ----------------
  task automatic wr_reg(logic [7:0] a, logic [63:0] d);
    cfg_we <= 1; cfg_addr <= a; cfg_wdata <= d; @(posedge clk); #1;
  endtask

  // ---------------- GbE receive source ----------------
  function automatic bytes_t mk_frame(bytes_t pl, logic [15:0] dport, logic [7:0] proto);
    bytes_t f; int plen; plen = pl.size();
    f = {8'h00, 8'h00, 8'h02, 8'h00, 8'h00, 8'h00, 8'h00, 8'h01, 8'h00, 8'h1B, 8'h21, 8'hAA, 8'hBB, 8'hCC,
         8'h08, 8'h00, 8'h45, 8'h00, 8'((plen + 28) >> 8), 8'(plen + 28), 8'h00, 8'h00, 8'h40, 8'h00,
         8'd64, proto, 8'h00, 8'h00, 8'd192, 8'd168, 8'd1, 8'd9, MYIP[31:24], MYIP[23:16], MYIP[15:8], MYIP[7:0],
         8'hC3, 8'h51, dport[15:8], dport[7:0], 8'((plen + 8) >> 8), 8'(plen + 8), 8'h00, 8'h00};
    foreach (pl[i]) f.push_back(pl[i]);
    while (f.size() < 62) f.push_back(8'h00);
    return f;
  endfunction

  logic took_rx;
  always @(posedge clk) took_rx <= mac_rx_valid && mac_rx_ready;
  int t_last_udp_word = 0;

  task automatic send_frame(bytes_t f);
    int nw; nw = (f.size() + 3) / 4;
    for (int w = 0; w < nw; w++) begin
      mac_rx_valid <= 1; mac_rx_sop <= (w == 0); mac_rx_eop <= (w == nw - 1);
      mac_rx_empty <= (w == nw - 1) ? 2'((4 - f.size() % 4) % 4) : 2'd0;
      for (int b = 0; b < 4; b++) mac_rx_data[31 - 8*b -: 8] <= (4*w + b < f.size()) ? f[4*w + b] : 8'h00;
      do begin @(posedge clk); #1; end while (!took_rx);
    end
  endtask

  // ---------------- APElink channel 0 source ----------------
  flit_t a0_flit; logic a0_valid = 0, took_a0;
  always_comb begin
    for (int a = 0; a < NAPE; a++) begin ape_in_flit[a] = '0; ape_in_valid[a] = 1'b0; end
    ape_in_flit[0] = a0_flit; ape_in_valid[0] = a0_valid;
  end
  always @(posedge clk) took_a0 <= a0_valid && ape_in_ready[0];

  task automatic send_ape(logic [3:0] dst, bytes_t pl);
    int nf; nf = (pl.size() + 15) / 16;
    for (int k = 0; k <= nf; k++) begin
      flit_t x; x.sop = (k == 0); x.eop = (k == nf); x.data = '0;
      if (k == 0) x.data = make_hdr(dst, 4'd2, 16'(pl.size()), 16'd0);
      else for (int b = 0; b < 16; b++) if (16*(k-1) + b < pl.size()) x.data[8*b +: 8] = pl[16*(k-1) + b];
      a0_valid <= 1; a0_flit <= x;
      do begin @(posedge clk); #1; end while (!took_a0);
    end
  endtask

  // ---------------- host transmit source ----------------
  logic took_c, took_d;
  always @(posedge clk) begin took_c <= tx_cmd_valid && tx_cmd_ready; took_d <= tx_data_valid && tx_data_ready; end

  task automatic host_send(logic [3:0] dst, logic [15:0] tag, bytes_t pl);
    int nf; nf = (pl.size() + 15) / 16;
    tx_cmd_valid <= 1; tx_cmd_dst_port <= dst; tx_cmd_len <= 16'(pl.size()); tx_cmd_tag <= tag;
    do begin @(posedge clk); #1; end while (!took_c);
    tx_cmd_valid <= 0;
    for (int k = 0; k < nf; k++) begin
      logic [127:0] d; d = '0;
      for (int b = 0; b < 16; b++) if (16*k + b < pl.size()) d[8*b +: 8] = pl[16*k + b];
      tx_data_valid <= 1; tx_data <= d;
      do begin @(posedge clk); #1; end while (!took_d);
    end
    tx_data_valid <= 0;
  endtask

  // ---------------- memory side monitor ----------------
  bytes_t cur_pkt; logic [63:0] cur_start; bit in_pkt = 0;
  int mdl_ptr = 0, mdl_fill = 0, last_evt_idx = -1;
  typedef struct { int idx; int bytes; } evt_t;
  evt_t exp_evt[$], got_evt[$];

  task automatic model_packet(int len, logic [63:0] start);
    int len16; len16 = (len + 15) / 16 * 16;
    if (mdl_fill + len16 > b_size[mdl_ptr]) begin
      exp_evt.push_back('{mdl_ptr, mdl_fill}); mdl_fill = 0; mdl_ptr = (mdl_ptr + 1) % NB_USED;
    end
    check(start == b_addr[mdl_ptr] + 64'(mdl_fill), $sformatf("packet start %h exp %h", start, b_addr[mdl_ptr] + 64'(mdl_fill)));
    mdl_fill += len16;
    if (mdl_fill == b_size[mdl_ptr]) begin
      exp_evt.push_back('{mdl_ptr, mdl_fill}); mdl_fill = 0; mdl_ptr = (mdl_ptr + 1) % NB_USED;
    end
  endtask

  int t_last_wr = 0, cyc = 0, max_udp_lat = 0, sum_udp_lat = 0;
  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n) begin
    wr_ready <= ($urandom % 4 != 0);
    mac_tx_ready <= ($urandom % 4 != 0);
    for (int a = 0; a < NAPE; a++) ape_out_ready[a] <= ($urandom % 3 != 0);
    if (wr_valid && !wr_ready) m_wr_stall++;
    if (mac_rx_valid && !mac_rx_ready) m_rx_stall++;
    for (int o = 0; o < NAPE + 2; o++) if ($countones(dut.u_router.req[o]) > 1) m_conflict++;
    if (wr_valid && wr_ready) begin
      if (!in_pkt) begin cur_pkt = {}; cur_start = wr_addr; in_pkt = 1; end
      check(wr_addr == cur_start + 64'(cur_pkt.size()), "write address not contiguous");
      if (wr_gpu) m_gpu_wr++; else m_host_wr++;
      for (int b = 0; b < 16; b++) if (wr_be[b]) cur_pkt.push_back(wr_data[8*b +: 8]);
      if (wr_last) begin
        in_pkt = 0;
        model_packet(cur_pkt.size(), cur_start);
        if (exp_gbe.size() > 0 && cur_pkt == exp_gbe[0]) begin
          void'(exp_gbe.pop_front()); m_mem_gbe++;
          sum_udp_lat += cyc - t_last_udp_word;
          if (cyc - t_last_udp_word > max_udp_lat) max_udp_lat = cyc - t_last_udp_word;
        end else if (exp_ape.size() > 0 && cur_pkt == exp_ape[0]) begin
          void'(exp_ape.pop_front()); m_mem_ape++;
        end else check(0, $sformatf("packet of %0d bytes in memory matches no source", cur_pkt.size()));
        checks++;
      end
    end
    if (evt_valid) begin
      // the event of a buffer closed for lack of room comes out when the next
      // packet is allocated, before that packet's writes: compare at the end
      got_evt.push_back('{int'(evt_idx), int'(evt_bytes)});
      check(evt_addr == b_addr[evt_idx] && evt_gpu == b_gpu[evt_idx], "event address / memory type");
      if (int'(evt_bytes) == b_size[evt_idx]) m_full++; else m_partial++;
      if (last_evt_idx == NB_USED - 1 && evt_idx == 0) m_wrap++;
      last_evt_idx = int'(evt_idx);
    end
  end

  // ---------------- GbE transmit monitor ----------------
  bytes_t txf;
  always @(posedge clk) if (rst_n && mac_tx_valid && mac_tx_ready) begin
    if (mac_tx_sop) txf = {};
    for (int b = 0; b < 4; b++) if (!mac_tx_eop || b < 4 - mac_tx_empty) txf.push_back(mac_tx_data[31 - 8*b -: 8]);
    if (mac_tx_eop) begin
      bytes_t p; p = txf[44:$];
      if (exp_udp_out.size() == 0) check(0, "unexpected UDP frame out");
      else begin
        check(p == exp_udp_out.pop_front(), "UDP frame payload out");
        check({txf[38], txf[39]} == 16'd7000, "UDP destination port from the tag");
        m_udp_out++;
      end
    end
  end

  // ---------------- APElink output monitors ----------------
  for (genvar a = 0; a < 2; a++) begin : g_aout
    bytes_t ap; int len;
    always @(posedge clk) if (rst_n && ape_out_valid[a] && ape_out_ready[a]) begin
      if (ape_out_flit[a].sop) begin
        apenet_hdr_t h; h = apenet_hdr_t'(ape_out_flit[a].data); ap = {}; len = int'(h.len);
      end else
        for (int b = 0; b < 16; b++) if (ap.size() < len) ap.push_back(ape_out_flit[a].data[8*b +: 8]);
      if (ape_out_flit[a].eop) begin
        if (a == 0) begin
          check(exp_ape0.size() > 0 && ap == exp_ape0[0], "host to APElink 0 payload");
          if (exp_ape0.size() > 0) void'(exp_ape0.pop_front());
          m_ape_out++;
        end else begin
          check(exp_ape1.size() > 0 && ap == exp_ape1[0], "APElink 0 to 1 payload");
          if (exp_ape1.size() > 0) void'(exp_ape1.pop_front());
          m_ape_switch++;
        end
      end
    end
  end

  initial begin
    repeat (400000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    wr_reg(8'h00, 64'(MYPORT)); wr_reg(8'h01, 64'(MYIP)); wr_reg(8'h02, 64'd1); wr_reg(8'h03, 64'd0);
    wr_reg(8'h04, 64'h02_00_00_00_00_01); wr_reg(8'h05, 64'h00_1B_21_AA_BB_CC);
    wr_reg(8'h06, 64'hC0A8_0109); wr_reg(8'h07, 64'd50001); wr_reg(8'h08, 64'd6000);
    for (int i = 0; i < NB_USED; i++) begin
      b_addr[i] = (i % 2) ? 64'h0000_0000_1000_0000 + 64'(i) * 64'h10_0000 : 64'h0000_7F00_0000_0000 + 64'(i) * 64'h10_0000;
      b_size[i] = 1024; b_gpu[i] = !(i % 2);
      wr_reg(8'h10, b_addr[i]);
      wr_reg(8'h11, {b_gpu[i], 15'd0, 16'(i), 32'(b_size[i])});
    end
    wr_reg(8'h09, 64'(NB_USED));
    cfg_we <= 0;
    repeat (5) @(posedge clk); #1;
    fork
      begin : gbe
        for (int n = 0; n < 60; n++) begin
          bytes_t p; int k;
          p = rand_bytes(1 + $urandom % 250); k = $urandom % 6;
          if (k == 0) begin send_frame(mk_frame(p, MYPORT + 16'd1, 8'd17)); n_bad_frames++; end
          else if (k == 1) begin send_frame(mk_frame(p, MYPORT, 8'd6)); n_bad_frames++; end
          else begin exp_gbe.push_back(p); send_frame(mk_frame(p, MYPORT, 8'd17)); t_last_udp_word = cyc; end
          if ($urandom % 3 == 0) begin mac_rx_valid <= 0; repeat ($urandom % 20) @(posedge clk); #1; end
        end
        mac_rx_valid <= 0;
        done_gbe = 1;
      end
      begin : ape
        for (int n = 0; n < 50; n++) begin
          bytes_t p; p = rand_bytes(1 + $urandom % 400);
          if (n == 10) send_ape(4'd0, rand_bytes(1500));          // larger than any buffer: dropped
          if (n == 20) send_ape(4'd9, rand_bytes(40));            // no such port
          if (n % 5 == 3) begin exp_ape1.push_back(p); send_ape(4'd3, p); end
          else begin exp_ape.push_back(p); send_ape(4'd0, p); end
        end
        a0_valid <= 0;
        done_ape = 1;
      end
      begin : host
        for (int n = 0; n < 20; n++) begin
          bytes_t p; p = rand_bytes(1 + $urandom % 300);
          if (n % 2) begin exp_udp_out.push_back(p); host_send(4'd1, 16'd7000, p); end
          else begin exp_ape0.push_back(p); host_send(4'd2, 16'd0, p); end
          repeat ($urandom % 50) @(posedge clk); #1;
        end
        done_host = 1;
      end
    join
    repeat (2000) @(posedge clk);
    check(exp_gbe.size() == 0, $sformatf("%0d UDP payloads never reached memory", exp_gbe.size()));
    check(exp_ape.size() == 0, $sformatf("%0d APElink payloads never reached memory", exp_ape.size()));
    check(exp_ape1.size() == 0 && exp_ape0.size() == 0 && exp_udp_out.size() == 0, "packets lost on transmit paths");
    // the model closes the last partly filled buffer only when another packet
    // arrives; the card does the same, so both lists must agree exactly
    check(got_evt.size() == exp_evt.size(), $sformatf("%0d buffer events, model %0d", got_evt.size(), exp_evt.size()));
    foreach (got_evt[i]) if (i < exp_evt.size())
      check(got_evt[i] == exp_evt[i], $sformatf("event %0d: idx %0d bytes %0d, model %0d %0d", i,
            got_evt[i].idx, got_evt[i].bytes, exp_evt[i].idx, exp_evt[i].bytes));
    check(st_udp_dropped == 32'(n_bad_frames), $sformatf("UDP dropped %0d exp %0d", st_udp_dropped, n_bad_frames));
    check(st_udp_frames == 32'(m_mem_gbe), "UDP frame counter");
    check(st_rx_dropped == 32'd1, "oversize packet dropped once");
    check(st_misrouted == 32'd1, "misrouted packet counted once");
    check(st_udp_tx_frames == 32'd10, "UDP transmit frame counter");
    // worst case: one packet (up to 26 flits) from each APElink port is ahead
    // on the router's Network Interface port and the write side is ready only
    // part of the time; the mean must stay near the idle pipeline depth
    check(max_udp_lat < 20 + 2 * NAPE * 26, $sformatf("UDP frame end to memory latency %0d cycles", max_udp_lat));
    check(m_mem_gbe > 0 && sum_udp_lat / m_mem_gbe < 20, $sformatf("mean UDP latency %0d cycles", sum_udp_lat / (m_mem_gbe + 1)));
    // every mechanism must have happened
    check(st_udp_dropped > 0, "mechanism: UDP filter drop");
    check(m_conflict > 0, "mechanism: router output conflict");
    check(m_wr_stall > 0, "mechanism: PCIe write backpressure");
    check(m_rx_stall > 0, "mechanism: MAC receive stall");
    check(m_wrap > 0, "mechanism: buffer list wrap-around");
    check(m_partial > 0, "mechanism: buffer closed before full");
    check(m_full > 0, "mechanism: buffer closed exactly full");
    check(m_gpu_wr > 0 && m_host_wr > 0, "mechanism: GPU and host memory writes");
    check(m_ape_switch > 0, "mechanism: APElink to APElink switching");
    check(m_udp_out > 0, "mechanism: host to UDP transmit");
    check(m_ape_out > 0, "mechanism: host to APElink transmit");
    $display("gbe->mem %0d ape->mem %0d ape->ape %0d host->udp %0d host->ape %0d conflicts %0d wr_stalls %0d rx_stalls %0d buffers %0d (full %0d partial %0d wraps %0d) max UDP latency %0d mean %0d",
             m_mem_gbe, m_mem_ape, m_ape_switch, m_udp_out, m_ape_out, m_conflict, m_wr_stall, m_rx_stall,
             st_buffers, m_full, m_partial, m_wrap, max_udp_lat, sum_udp_lat / (m_mem_gbe + 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
