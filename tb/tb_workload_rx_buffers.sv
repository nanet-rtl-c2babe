// Receive-buffer workload on the full card, at its default parameters.
//
// What it does: fills GPU receive buffers of increasing size the way the two
// latency measurements of NaNet-1 do, and measures, in clock cycles, the time
// from the first word of a bunch of packets to the moment the buffer is
// signalled complete (evt_valid).
//
//  * GbE "system loopback": buffers of 16, 64, 256, 1024 and 4096 events of
//    64 bytes each, filled by UDP datagrams of 16 events (1024-byte payload).
//    Words enter the UDP offloader at Gigabit line rate: the 32-bit receive
//    channel runs at 200 MHz (6.4 Gb/s), so one byte lasts 1.6 cycles, and
//    every frame also spends 24 byte times on preamble, FCS and gap.
//  * APElink: buffers of 16 to 16384 events, filled through APElink port 0
//    by 1024-byte packets sent back to back at one flit per cycle.
//
// How it checks: every written byte is compared with the pattern the source
// used, every buffer must close exactly full, each size is run twice and the
// two latencies must be equal (the card adds no jitter of its own). For GbE
// the event must follow the last word within a small pipeline delay, so the
// latency is the wire time of the bunch. For APElink the sustained rate must
// reach 20 Gb/s at the assumed 175 MHz core clock, i.e. 14.3 bytes per cycle.
//
// Follows the paper: the buffer-size ranges, the latency definition (first
// packet of the bunch to the buffer being signalled), the 6.4 Gb/s offloader
// channel and the ~20 Gb/s APElink rate. This design's choices: 64-byte
// events, 16 events per packet, the 175 MHz clock and the pipeline bound.
module tb_workload_rx_buffers;
  import nanet_pkg::*;
  localparam int NAPE = 3, EVT_B = 64, PKT_EVT = 16, PKT_B = EVT_B * PKT_EVT;
  localparam logic [15:0] MYPORT = 16'd50000;
  localparam logic [31:0] MYIP = 32'hC0A8_0102;
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

  // payload byte at offset off of the k-th buffer filled
  function automatic logic [7:0] pat(int k, int off);
    return 8'(off * 13 + (off >> 8) + k * 7);
  endfunction

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- memory side: data and events ----------------
  logic [63:0] buf_base[2]; int buf_size = 0;
  int n_evt = 0, t_evt = 0, bad_bytes = 0;
  always @(posedge clk) if (rst_n) begin
    if (wr_valid && wr_ready) begin
      int off; off = int'(wr_addr - buf_base[n_evt % 2]);
      if (off < 0 || off + 16 > buf_size) bad_bytes++;
      for (int b = 0; b < 16; b++) if (wr_be[b] && wr_data[8*b +: 8] != pat(n_evt, off + b)) bad_bytes++;
      if (!wr_gpu) bad_bytes++;
    end
    if (evt_valid) begin
      check(int'(evt_bytes) == buf_size && evt_addr == buf_base[n_evt % 2], $sformatf("buffer %0d closed with %0d bytes", n_evt, evt_bytes));
      n_evt <= n_evt + 1; t_evt <= cyc;
    end
  end

  task automatic wr_reg(logic [7:0] a, logic [63:0] d);
    cfg_we <= 1; cfg_addr <= a; cfg_wdata <= d; @(posedge clk); #1;
  endtask

  // two GPU buffers of the given size, used in turn
  task automatic set_buffers(int bytes);
    buf_size = bytes;
    for (int i = 0; i < 2; i++) begin
      buf_base[i] = 64'h0000_7F00_0000_0000 + 64'(i) * 64'h100_0000;
      wr_reg(8'h10, buf_base[i]); wr_reg(8'h11, {1'b1, 15'd0, 16'(i), 32'(bytes)});
    end
    wr_reg(8'h09, 64'd2);
    cfg_we <= 0; @(posedge clk); #1;
  endtask

  // ---------------- GbE source, paced at line rate ----------------
  logic took_rx;
  always @(posedge clk) took_rx <= mac_rx_valid && mac_rx_ready;

  // one UDP frame carrying bytes [off, off+PKT_B) of buffer k; the frame's
  // byte times start at wire byte position pos (1.6 cycles per byte)
  task automatic send_udp(int k, int off, int t0, inout longint pos, output int t_first, output int t_last);
    byte unsigned f[$];
    int nw, plen; plen = PKT_B;
    f = {8'h00, 8'h00, 8'h02, 8'h00, 8'h00, 8'h00, 8'h00, 8'h01, 8'h00, 8'h1B, 8'h21, 8'hAA, 8'hBB, 8'hCC,
         8'h08, 8'h00, 8'h45, 8'h00, 8'((plen + 28) >> 8), 8'(plen + 28), 8'h00, 8'h00, 8'h40, 8'h00,
         8'd64, 8'd17, 8'h00, 8'h00, 8'd192, 8'd168, 8'd1, 8'd9, MYIP[31:24], MYIP[23:16], MYIP[15:8], MYIP[7:0],
         8'hC3, 8'h51, MYPORT[15:8], MYPORT[7:0], 8'((plen + 8) >> 8), 8'(plen + 8), 8'h00, 8'h00};
    for (int i = 0; i < plen; i++) f.push_back(pat(k, off + i));
    nw = (f.size() + 3) / 4;
    pos += 8;                                    // preamble and start delimiter
    for (int w = 0; w < nw; w++) begin
      // the word is complete on the wire after its fourth byte
      if (cyc < t0 + int'((pos + 4) * 8 / 5)) begin
        mac_rx_valid <= 0;
        while (cyc < t0 + int'((pos + 4) * 8 / 5)) begin @(posedge clk); #1; end
      end
      mac_rx_valid <= 1; mac_rx_sop <= (w == 0); mac_rx_eop <= (w == nw - 1);
      mac_rx_empty <= (w == nw - 1) ? 2'((4 - f.size() % 4) % 4) : 2'd0;
      for (int b = 0; b < 4; b++) mac_rx_data[31 - 8*b -: 8] <= (4*w + b < f.size()) ? f[4*w + b] : 8'h00;
      do begin @(posedge clk); #1; end while (!took_rx);
      if (w == 0) t_first = cyc - 1;
      t_last = cyc - 1;
      pos += 4;
    end
    mac_rx_valid <= 0;
    pos += 4 + 12;                               // FCS and inter-frame gap
  endtask

  // ---------------- APElink port 0 source, back to back ----------------
  flit_t a0_flit = '0; logic a0_valid = 0, took_a0;
  always_comb begin
    for (int a = 0; a < NAPE; a++) begin ape_in_flit[a] = '0; ape_in_valid[a] = 1'b0; end
    ape_in_flit[0] = a0_flit; ape_in_valid[0] = a0_valid;
  end
  always @(posedge clk) took_a0 <= a0_valid && ape_in_ready[0];
  initial for (int a = 0; a < NAPE; a++) ape_out_ready[a] = 1'b1;

  task automatic send_ape(int k, int off, output int t_first);
    for (int f = 0; f <= PKT_B / 16; f++) begin
      flit_t x; x.sop = (f == 0); x.eop = (f == PKT_B / 16); x.data = '0;
      if (f == 0) x.data = make_hdr(4'd0, 4'd2, 16'(PKT_B), 16'd0);
      else for (int b = 0; b < 16; b++) x.data[8*b +: 8] = pat(k, off + 16*(f-1) + b);
      a0_valid <= 1; a0_flit <= x;
      do begin @(posedge clk); #1; end while (!took_a0);
      if (f == 0) t_first = cyc - 1;
    end
  endtask

  initial begin
    repeat (4000000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int gbe_ev[5] = '{16, 64, 256, 1024, 4096};
    int ape_ev[5] = '{16, 128, 1024, 4096, 16384};
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    wr_reg(8'h00, 64'(MYPORT)); wr_reg(8'h01, 64'(MYIP)); wr_reg(8'h02, 64'd1); wr_reg(8'h03, 64'd0);
    cfg_we <= 0;

    // ---- GbE system loopback ----
    foreach (gbe_ev[s]) begin
      int lat[2];
      set_buffers(gbe_ev[s] * EVT_B);
      for (int r = 0; r < 2; r++) begin
        int k, t0, t_first, t_last, tf, tl; longint pos;
        k = n_evt; pos = 0;
        repeat (50) @(posedge clk); #1;
        t0 = cyc;
        for (int p = 0; p < gbe_ev[s] / PKT_EVT; p++) begin
          send_udp(k, p * PKT_B, t0, pos, tf, tl);
          if (p == 0) t_first = tf;
          t_last = tl;
        end
        while (n_evt == k) begin @(posedge clk); #1; end
        lat[r] = t_evt - t_first;
        check(t_evt - t_last <= 40, $sformatf("GbE %0d events: event %0d cycles after the last word", gbe_ev[s], t_evt - t_last));
        if (r == 1) $display("GbE  %5d events (%7d B): %8d cycles = %8.2f us at 200 MHz, %0d cycles after last word",
                             gbe_ev[s], gbe_ev[s] * EVT_B, lat[r], real'(lat[r]) * 0.005, t_evt - t_last);
      end
      check(lat[0] == lat[1], $sformatf("GbE %0d events: latency %0d then %0d", gbe_ev[s], lat[0], lat[1]));
    end

    // ---- APElink ----
    foreach (ape_ev[s]) begin
      int lat[2];
      set_buffers(ape_ev[s] * EVT_B);
      for (int r = 0; r < 2; r++) begin
        int k, t_first, tf;
        k = n_evt;
        repeat (50) @(posedge clk); #1;
        for (int p = 0; p < ape_ev[s] / PKT_EVT; p++) begin
          send_ape(k, p * PKT_B, tf);
          if (p == 0) t_first = tf;
        end
        a0_valid <= 0;
        while (n_evt == k) begin @(posedge clk); #1; end
        lat[r] = t_evt - t_first;
        if (ape_ev[s] >= 1024)
          check(real'(ape_ev[s] * EVT_B) / real'(lat[r]) >= 14.3,
                $sformatf("APElink %0d events: %0.2f bytes per cycle", ape_ev[s], real'(ape_ev[s] * EVT_B) / real'(lat[r])));
        if (r == 1) $display("APE  %5d events (%7d B): %8d cycles = %8.2f us at 175 MHz, %0.2f B/cycle = %0.1f Gb/s",
                             ape_ev[s], ape_ev[s] * EVT_B, lat[r], real'(lat[r]) / 175.0,
                             real'(ape_ev[s] * EVT_B) / real'(lat[r]), real'(ape_ev[s] * EVT_B) / real'(lat[r]) * 8.0 * 0.175);
      end
      check(lat[0] == lat[1], $sformatf("APElink %0d events: latency %0d then %0d", ape_ev[s], lat[0], lat[1]));
    end

    repeat (20) @(posedge clk);
    check(bad_bytes == 0, $sformatf("%0d written bytes wrong or outside the buffer", bad_bytes));
    check(n_evt == 20, $sformatf("%0d buffers signalled, expected 20", n_evt));
    check(st_udp_dropped == 0 && st_rx_dropped == 0 && st_misrouted == 0, "nothing dropped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
