// tb_udp_tx: self-checking test of the UDP/IP transmit encapsulation.
// Random payloads (1-300 bytes, tag zero or not) are sent with random gaps.
// Each frame coming out under random backpressure is collected as bytes and
// checked field by field: addresses, EtherType, IP total length, protocol,
// that the IPv4 header checksums to 0xFFFF, the UDP ports and length, and
// the payload bytes.
module tb_udp_tx;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [47:0] cfg_src_mac = 48'h02_00_00_00_00_01, cfg_dst_mac = 48'h00_1B_21_AA_BB_CC;
  logic [31:0] cfg_src_ip = 32'hC0A8_0102, cfg_dst_ip = 32'hC0A8_0109;
  logic [15:0] cfg_src_port = 16'd50000, cfg_dst_port = 16'd60000;
  logic [31:0] pl_data = 0; logic pl_valid = 0, pl_sop = 0, pl_eop = 0, pl_ready; logic [1:0] pl_empty = 0;
  logic [15:0] pl_len = 0, pl_tag = 0;
  logic [31:0] tx_data; logic tx_valid, tx_sop, tx_eop, tx_ready = 1; logic [1:0] tx_empty;
  logic [31:0] cnt_frames;

  udp_tx dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  typedef byte unsigned bytes_t[$];
  typedef struct { bytes_t pl; logic [15:0] dport; } exp_t;
  exp_t exp_q[$];
  logic took;
  always @(posedge clk) took <= pl_valid && pl_ready;

  function automatic int be16(bytes_t f, int i); return {f[i], f[i+1]}; endfunction

  bytes_t fr;
  always @(posedge clk) if (rst_n) begin
    tx_ready <= ($urandom % 3 != 0);
    if (tx_valid && tx_ready) begin
      if (tx_sop) fr = {};
      for (int b = 0; b < 4; b++) if (!tx_eop || b < 4 - tx_empty) fr.push_back(tx_data[31 - 8*b -: 8]);
      if (tx_eop) begin
        exp_t e; int s; bytes_t p;
        if (exp_q.size() == 0) check(0, "unexpected frame");
        else begin
          e = exp_q.pop_front();
          check({fr[2], fr[3], fr[4], fr[5], fr[6], fr[7]} == cfg_dst_mac, "dst mac");
          check({fr[8], fr[9], fr[10], fr[11], fr[12], fr[13]} == cfg_src_mac, "src mac");
          check(be16(fr, 14) == 16'h0800 && fr[16] == 8'h45 && fr[25] == 8'd17, "ethertype/version/proto");
          check(be16(fr, 18) == e.pl.size() + 28, $sformatf("ip total length %0d exp %0d, frame %0d bytes", be16(fr, 18), e.pl.size() + 28, fr.size()));
          s = 0;
          for (int i = 16; i < 36; i += 2) s += be16(fr, i);
          while (s > 16'hFFFF) s = (s & 16'hFFFF) + (s >> 16);
          check(s == 16'hFFFF, $sformatf("ip checksum, sum %h", s));
          check({fr[28], fr[29], fr[30], fr[31]} == cfg_src_ip && {fr[32], fr[33], fr[34], fr[35]} == cfg_dst_ip, "ip addresses");
          check(be16(fr, 36) == cfg_src_port && be16(fr, 38) == e.dport, "udp ports");
          check(be16(fr, 40) == e.pl.size() + 8, "udp length");
          p = fr[44:$];
          check(p == e.pl, "payload");
        end
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    for (int n = 0; n < 60; n++) begin
      int len, nw; logic [15:0] tag; bytes_t p;
      len = 1 + $urandom % 300; nw = (len + 3) / 4;
      tag = ($urandom % 2) ? 16'(1 + $urandom % 1000) : 16'd0;
      p = {};
      for (int i = 0; i < len; i++) p.push_back(8'($urandom));
      exp_q.push_back('{p, tag != 0 ? tag : cfg_dst_port});
      for (int w = 0; w < nw; w++) begin
        logic [31:0] d;
        for (int b = 0; b < 4; b++) d[31 - 8*b -: 8] = (4*w + b < len) ? p[4*w + b] : 8'h00;
        while ($urandom % 4 == 0) begin pl_valid <= 0; @(posedge clk); #1; end
        pl_valid <= 1; pl_data <= d; pl_sop <= (w == 0); pl_eop <= (w == nw - 1);
        pl_empty <= 2'((4 - len % 4) % 4); pl_len <= 16'(len); pl_tag <= tag;
        do begin @(posedge clk); #1; end while (!took);
      end
    end
    pl_valid <= 0;
    repeat (100) @(posedge clk);
    check(exp_q.size() == 0, "frames missing");
    check(cnt_frames == 32'd60, "frame counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
