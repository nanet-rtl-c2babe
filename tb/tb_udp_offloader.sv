// tb_udp_offloader: self-checking test of the UDP receive offload.
// Builds Ethernet/IPv4/UDP frames byte by byte (with the two-byte receive
// shift), sends good frames and frames that must be rejected (wrong port,
// wrong EtherType, IP options, not UDP, wrong IP when checking), with random
// input gaps and output backpressure, and compares the payload stream,
// lengths, ports and counters with the bytes that were put in. A final
// burst with no gaps checks the one-word-per-clock rate.
module tb_udp_offloader;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [31:0] rx_data; logic rx_valid, rx_sop, rx_eop, rx_ready; logic [1:0] rx_empty;
  logic [31:0] pl_data; logic pl_valid, pl_sop, pl_eop, pl_ready; logic [1:0] pl_empty;
  logic [15:0] pl_len, pl_sport, pl_dport;
  logic [31:0] cnt_frames, cnt_dropped;
  logic [15:0] cfg_udp_port = 16'd50000;
  logic [31:0] cfg_ip = 32'hC0A8_0102;
  logic        cfg_ip_check = 1'b1;

  udp_offloader dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------- frame builder ----------
  typedef byte unsigned bytes_t[$];
  function automatic bytes_t mk_frame(int plen, logic [15:0] dport, logic [15:0] etype,
                                      logic [7:0] verihl, logic [7:0] proto, logic [31:0] dip,
                                      ref bytes_t payload);
    bytes_t f;
    f = {8'h00, 8'h00};                                    // receive shift
    for (int i = 0; i < 6; i++) f.push_back(8'h10 + i);    // dst mac
    for (int i = 0; i < 6; i++) f.push_back(8'h20 + i);    // src mac
    f.push_back(etype[15:8]); f.push_back(etype[7:0]);
    f.push_back(verihl); f.push_back(8'h00);
    f.push_back(8'((plen + 28) >> 8)); f.push_back(8'(plen + 28));
    f.push_back(8'h12); f.push_back(8'h34); f.push_back(8'h40); f.push_back(8'h00);
    f.push_back(8'd64); f.push_back(proto); f.push_back(8'hAB); f.push_back(8'hCD);
    f.push_back(8'd192); f.push_back(8'd168); f.push_back(8'd1); f.push_back(8'd9);
    f.push_back(dip[31:24]); f.push_back(dip[23:16]); f.push_back(dip[15:8]); f.push_back(dip[7:0]);
    f.push_back(8'hC3); f.push_back(8'h50);               // src port 50000
    f.push_back(dport[15:8]); f.push_back(dport[7:0]);
    f.push_back(8'((plen + 8) >> 8)); f.push_back(8'(plen + 8));
    f.push_back(8'h00); f.push_back(8'h00);
    payload = {};
    for (int i = 0; i < plen; i++) begin
      byte unsigned b; b = 8'($urandom); payload.push_back(b); f.push_back(b);
    end
    while (f.size() < 62) f.push_back(8'h00);              // Ethernet minimum
    return f;
  endfunction

  // ---------- expected results ----------
  typedef struct { int len; logic [15:0] dport; bytes_t pl; } exp_t;
  exp_t exp_q[$];
  int   n_good = 0, n_bad = 0;
  bit   gaps = 1, bp = 1;

  logic took;    // the word on the input was taken at the last edge
  always @(posedge clk) took <= rx_valid && rx_ready;

  task automatic send(bytes_t f);
    int nw; nw = (f.size() + 3) / 4;
    for (int w = 0; w < nw; w++) begin
      while (gaps && ($urandom % 4 == 0)) begin rx_valid <= 0; @(posedge clk); #1; end
      rx_valid <= 1; rx_sop <= (w == 0); rx_eop <= (w == nw - 1);
      rx_empty <= (w == nw - 1) ? 2'((4 - f.size() % 4) % 4) : 2'd0;
      for (int b = 0; b < 4; b++)
        rx_data[31 - 8*b -: 8] <= (4*w + b < f.size()) ? f[4*w + b] : 8'h00;
      do begin @(posedge clk); #1; end while (!took);
    end
  endtask

  // ---------- output monitor ----------
  bytes_t got; int got_len; logic [15:0] got_dport; bit inpkt = 0;
  int first_cyc, last_cyc, cyc = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (rst_n) begin
    pl_ready <= bp ? ($urandom % 3 != 0) : 1'b1;
    if (pl_valid && pl_ready) begin
      if (pl_sop) begin got = {}; got_len = pl_len; got_dport = pl_dport; inpkt = 1; first_cyc = cyc; end
      check(inpkt, "payload word outside a packet");
      for (int b = 0; b < 4; b++)
        if (!pl_eop || b < 4 - pl_empty) got.push_back(pl_data[31 - 8*b -: 8]);
      if (pl_eop) begin
        exp_t e;
        last_cyc = cyc;
        inpkt = 0;
        if (exp_q.size() == 0) check(0, "unexpected packet");
        else begin
          e = exp_q.pop_front();
          check(got_len == e.len, $sformatf("len %0d exp %0d", got_len, e.len));
          check(got_dport == e.dport, "dport");
          check(got == e.pl, $sformatf("payload mismatch (len %0d)", e.len));
        end
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    bytes_t f, p;
    rx_valid = 0; rx_sop = 0; rx_eop = 0; rx_empty = 0; rx_data = 0; pl_ready = 1;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int n = 0; n < 60; n++) begin
      int kind, plen;
      kind = $urandom % 6; plen = 1 + $urandom % 300;
      case (kind)
        0: f = mk_frame(plen, 16'd50001, 16'h0800, 8'h45, 8'd17, cfg_ip, p);   // other port
        1: f = mk_frame(plen, cfg_udp_port,  16'h0806, 8'h45, 8'd17, cfg_ip, p);   // ARP
        2: f = mk_frame(plen, cfg_udp_port,  16'h0800, 8'h46, 8'd17, cfg_ip, p);   // IP options
        3: f = mk_frame(plen, cfg_udp_port,  16'h0800, 8'h45, 8'd6,  cfg_ip, p);   // TCP
        4: f = mk_frame(plen, cfg_udp_port,  16'h0800, 8'h45, 8'd17, 32'h0A000001, p); // other IP
        default: f = mk_frame(plen, cfg_udp_port, 16'h0800, 8'h45, 8'd17, cfg_ip, p);
      endcase
      if (kind == 5) begin exp_q.push_back('{plen, cfg_udp_port, p}); n_good++; end
      else n_bad++;
      send(f);
    end
    // full-rate burst: 64 payload words must leave in 64 consecutive cycles
    gaps = 0; bp = 0;
    repeat (5) @(posedge clk);
    f = mk_frame(256, cfg_udp_port, 16'h0800, 8'h45, 8'd17, cfg_ip, p);
    exp_q.push_back('{256, cfg_udp_port, p}); n_good++;
    send(f);
    rx_valid <= 0;
    repeat (10) @(posedge clk);
    check(last_cyc - first_cyc == 63, $sformatf("rate: 64 words took %0d cycles", last_cyc - first_cyc + 1));
    check(exp_q.size() == 0, "packets missing at the output");
    check(cnt_frames == 32'(n_good), $sformatf("cnt_frames %0d exp %0d", cnt_frames, n_good));
    check(cnt_dropped == 32'(n_bad), $sformatf("cnt_dropped %0d exp %0d", cnt_dropped, n_bad));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
