// tb_gpu_io_accel: self-checking test of the receive-buffer list.
// Registers a list of buffers of random sizes (GPU and host), then makes
// random allocation requests and compares grant, drop, address and the
// buffer-complete events against a reference model of the list: packets
// packed on 16-byte boundaries, a buffer closed when the next packet does not
// fit or, when exactly full, only after the packet's last write is reported
// (requests made in between are not granted), oversize packets dropped, wrap-around after the
// last registered buffer, no grant while no buffer is registered.
module tb_gpu_io_accel;
  import nanet_pkg::*;
  localparam int NB = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic tbl_we = 0; logic [2:0] tbl_idx = 0; logic [63:0] tbl_addr = 0;
  logic [31:0] tbl_size = 0; logic tbl_gpu = 0; logic [3:0] cfg_nbuf = 0;
  logic alloc_req = 0, pkt_done = 0; logic [15:0] alloc_len = 0;
  logic alloc_gnt, alloc_drop, alloc_gpu; logic [63:0] alloc_addr;
  logic evt_valid, evt_gpu; logic [2:0] evt_idx; logic [63:0] evt_addr; logic [31:0] evt_bytes, cnt_buffers;

  gpu_io_accel #(.NBUF(NB)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // reference model
  logic [63:0] m_addr[NB]; int m_size[NB]; bit m_gpu[NB];
  int m_ptr = 0, m_fill = 0, m_n = 0, n_evt = 0, n_wrap = 0, n_drop = 0, n_partial = 0, n_full = 0;

  initial begin
    repeat (100000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    // no buffers: a request must not be granted
    alloc_req = 1; alloc_len = 16'd64; #1;
    check(!alloc_gnt, "grant with an empty list");
    alloc_req = 0;
    for (int i = 0; i < NB; i++) begin
      m_addr[i] = {32'h0000_0100 + 32'(i), 32'($urandom) & ~32'hF};
      m_size[i] = 16 * (4 + $urandom % 40);
      m_gpu[i]  = 1'($urandom);
      tbl_we = 1; tbl_idx = 3'(i); tbl_addr = m_addr[i]; tbl_size = 32'(m_size[i]); tbl_gpu = m_gpu[i];
      @(posedge clk); #1;
    end
    tbl_we = 0;
    m_n = 5; cfg_nbuf = 4'(m_n);
    @(posedge clk); #1;
    for (int n = 0; n < 600; n++) begin
      int len, len16; bit e_gnt, e_drop, e_close; int e_bytes, e_idx;
      len = ($urandom % 20 == 0) ? 700 : 1 + $urandom % 200;
      len16 = (len + 15) / 16 * 16;
      alloc_req = 1; alloc_len = 16'(len);
      // model
      e_gnt = 0; e_drop = 0; e_close = 0; e_bytes = 0; e_idx = m_ptr;
      if (len16 > m_size[m_ptr]) begin e_gnt = 1; e_drop = 1; end
      else if (m_fill + len16 <= m_size[m_ptr]) e_gnt = 1;
      else begin e_close = 1; e_bytes = m_fill; end
      #1;
      check(alloc_gnt == e_gnt && alloc_drop == e_drop, $sformatf("req %0d: gnt/drop %b%b exp %b%b", n, alloc_gnt, alloc_drop, e_gnt, e_drop));
      if (e_gnt && !e_drop) begin
        check(alloc_addr == m_addr[m_ptr] + 64'(m_fill), "address");
        check(alloc_gpu == m_gpu[m_ptr], "gpu flag");
      end
      @(posedge clk); #1;
      if (e_drop) n_drop++;
      if (e_gnt && !e_drop) m_fill += len16;
      check(evt_valid == e_close, "event presence");
      if (e_close) begin
        check(evt_idx == 3'(e_idx) && evt_bytes == 32'(e_bytes) && evt_addr == m_addr[e_idx]
              && evt_gpu == m_gpu[e_idx], "event fields");
        n_partial++;
        n_evt++; m_fill = 0; m_ptr = (m_ptr + 1) % m_n;
        if (m_ptr == 0) n_wrap++;
        // a refused request is retried in the next cycle, as the RX block does
        n--;
      end else if (m_fill == m_size[m_ptr]) begin
        // exactly full: nothing is granted and nothing signalled before pkt_done
        repeat ($urandom % 4) begin
          alloc_req = 1; alloc_len = 16'd16; #1;
          check(!alloc_gnt, "grant while a full buffer waits for its last write");
          @(posedge clk); #1;
          check(!evt_valid, "full buffer signalled before its last write");
        end
        alloc_req = 0; pkt_done = 1;
        @(posedge clk); #1; pkt_done = 0;
        check(evt_valid && evt_idx == 3'(m_ptr) && evt_bytes == 32'(m_size[m_ptr]), "full buffer event after last write");
        n_evt++; n_full++; m_fill = 0; m_ptr = (m_ptr + 1) % m_n;
        if (m_ptr == 0) n_wrap++;
      end
      alloc_req = 0;
      if ($urandom % 2) begin @(posedge clk); #1; end
    end
    check(cnt_buffers == 32'(n_evt), "buffer counter");
    check(n_wrap > 0 && n_drop > 0 && n_partial > 0 && n_full > 0, $sformatf("coverage wrap=%0d drop=%0d partial=%0d", n_wrap, n_drop, n_partial));
    $display("buffers=%0d wraps=%0d drops=%0d partial=%0d full=%0d", n_evt, n_wrap, n_drop, n_partial, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
