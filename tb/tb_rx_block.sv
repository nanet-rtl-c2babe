// tb_rx_block: self-checking test of the Network Interface receive side.
// The test plays the buffer allocator: it grants requests after a random
// delay, hands out addresses from its own counter and refuses (drop) every
// packet longer than 900 bytes. Random packets enter with random gaps; the
// test checks every write request (address, data, byte enables, GPU flag,
// last beat) under random PCIe backpressure, that refused packets produce no
// writes, and the packet and drop counters.
module tb_rx_block;
  import nanet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  flit_t in_flit = '0; logic in_valid = 0, in_ready;
  logic alloc_req, alloc_gnt = 0, alloc_drop = 0, alloc_gpu = 0;
  logic [15:0] alloc_len; logic [63:0] alloc_addr = 0;
  logic wr_valid, wr_gpu, wr_last, wr_ready = 1, pkt_done;
  int n_done = 0, n_last = 0;
  logic [63:0] wr_addr; logic [127:0] wr_data; logic [15:0] wr_be;
  logic [31:0] cnt_pkts, cnt_dropped;

  rx_block dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  typedef struct { logic [63:0] addr; logic [127:0] data; logic [15:0] be; bit gpu, last; } wr_t;
  wr_t exp_q[$];
  logic [63:0] next_addr = 64'h0000_0200_0000_0000;
  int n_ok = 0, n_drop = 0;

  // allocator model: combinational response, randomly delayed
  bit ok_now;
  always @(posedge clk) ok_now <= ($urandom % 3 != 0);
  always_comb begin
    alloc_gnt  = alloc_req && ok_now;
    alloc_drop = alloc_len > 16'd900;
    alloc_addr = next_addr;
    alloc_gpu  = next_addr[40];
  end

  logic took;
  always @(posedge clk) took <= in_valid && in_ready;

  task automatic send(int len);
    int nf; bit drop; logic [63:0] a; bit g;
    nf = (len + 15) / 16;
    drop = len > 900;
    for (int k = 0; k <= nf; k++) begin
      flit_t x;
      x.sop = (k == 0); x.eop = (k == nf);
      x.data = (k == 0) ? make_hdr(4'd0, 4'd1, 16'(len), 16'd0) : {$urandom, $urandom, $urandom, $urandom};
      while ($urandom % 4 == 0) begin in_valid <= 0; @(posedge clk); #1; end
      in_valid <= 1; in_flit <= x;
      do begin @(posedge clk); #1; end while (!took);
      if (k == 0) begin
        a = next_addr; g = next_addr[40];
        if (!drop) next_addr = next_addr + 64'((nf * 16)) + 64'h100 * 64'($urandom % 2) ;
        if (!drop && $urandom % 2) next_addr[40] = ~next_addr[40];
        if (drop) n_drop++; else n_ok++;
      end else if (!drop) begin
        int rem; wr_t w;
        rem = len - 16 * (k - 1);
        w.addr = a + 64'(16 * (k - 1)); w.data = x.data; w.gpu = g; w.last = x.eop;
        w.be = (rem >= 16) ? 16'hFFFF : 16'((1 << rem) - 1);
        exp_q.push_back(w);
      end
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    wr_ready <= ($urandom % 3 != 0);
    if (pkt_done) n_done++;
    if (wr_valid && wr_ready && wr_last) n_last++;
    if (wr_valid && wr_ready) begin
      if (exp_q.size() == 0) check(0, "unexpected write");
      else begin
        wr_t e; e = exp_q.pop_front();
        check(wr_addr == e.addr && wr_data == e.data && wr_be == e.be && wr_gpu == e.gpu
              && wr_last == e.last, $sformatf("write @%h be %h exp @%h be %h", wr_addr, wr_be, e.addr, e.be));
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    for (int n = 0; n < 150; n++) send(($urandom % 10 == 0) ? 901 + $urandom % 200 : $urandom % 400);
    in_valid <= 0;
    repeat (50) @(posedge clk);
    check(exp_q.size() == 0, "writes missing");
    check(cnt_pkts == 32'(n_ok) && cnt_dropped == 32'(n_drop), $sformatf("counters %0d/%0d exp %0d/%0d", cnt_pkts, cnt_dropped, n_ok, n_drop));
    check(n_drop > 0, "no drop exercised");
    check(n_done == n_last && n_done > 0, $sformatf("pkt_done pulses %0d exp %0d", n_done, n_last));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
