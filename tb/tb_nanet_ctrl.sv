// tb_nanet_ctrl: self-checking test of the receive-direction NaNet
// Controller. Random-length payloads (32-bit words, random gaps) go in; the
// test rebuilds the expected APEnet+ packet (header fields, four words per
// flit in little-endian word order, zero padding, eop on the last flit) and
// compares it flit by flit under random router backpressure. A gap-free run
// checks that the controller keeps the 32-bit input at one word per clock.
module tb_nanet_ctrl;
  import nanet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [PORT_W-1:0] cfg_dst_port = 4'd0;
  logic [31:0] pl_data = '0; logic pl_valid = 0, pl_sop = 0, pl_eop = 0, pl_ready;
  logic [15:0] pl_len = '0, pl_dport = '0;
  flit_t out_flit; logic out_valid, out_ready = 1;

  nanet_ctrl #(.MY_PORT(4'd1)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  flit_t exp_q[$];
  bit gaps = 1, bp = 1;
  logic took;
  always @(posedge clk) took <= pl_valid && pl_ready;

  task automatic send(int len, logic [15:0] dport);
    int nw; logic [31:0] w[$];
    nw = (len + 3) / 4;
    for (int i = 0; i < nw; i++) w.push_back($urandom);
    // expected packet
    exp_q.push_back('{sop: 1'b1, eop: 1'b0, data: make_hdr(cfg_dst_port, 4'd1, 16'(len), dport)});
    for (int f = 0; f < (nw + 3) / 4; f++) begin
      flit_t x; x.sop = 0; x.eop = (f == (nw + 3) / 4 - 1); x.data = '0;
      for (int k = 0; k < 4; k++) if (4*f + k < nw) x.data[32*k +: 32] = {w[4*f+k][7:0], w[4*f+k][15:8], w[4*f+k][23:16], w[4*f+k][31:24]};
      exp_q.push_back(x);
    end
    for (int i = 0; i < nw; i++) begin
      while (gaps && $urandom % 4 == 0) begin pl_valid <= 0; @(posedge clk); #1; end
      pl_valid <= 1; pl_sop <= (i == 0); pl_eop <= (i == nw - 1);
      pl_data <= w[i]; pl_len <= 16'(len); pl_dport <= dport;
      do begin @(posedge clk); #1; end while (!took);
    end
  endtask

  int n_flits = 0, first_c = 0, last_c = 0, cyc = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (rst_n) begin
    out_ready <= bp ? ($urandom % 3 != 0) : 1'b1;
    if (out_valid && out_ready) begin
      n_flits++;
      if (out_flit.sop) first_c = cyc;
      last_c = cyc;
      if (exp_q.size() == 0) check(0, "unexpected flit");
      else begin
        flit_t e; e = exp_q.pop_front();
        check(out_flit == e, $sformatf("flit %0d: got %h/%b%b exp %h/%b%b", n_flits,
              out_flit.data, out_flit.sop, out_flit.eop, e.data, e.sop, e.eop));
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    for (int n = 0; n < 80; n++) begin
      cfg_dst_port = 4'($urandom % 5);
      send(1 + $urandom % 200, 16'($urandom));
    end
    pl_valid <= 0;
    repeat (20) @(posedge clk);
    // rate: 256 bytes = 64 words, 16 payload flits + header, no gaps
    gaps = 0; bp = 0; #1;
    send(256, 16'd7);
    pl_valid <= 0;
    repeat (10) @(posedge clk);
    check(last_c - first_c <= 66, $sformatf("64 words took %0d cycles", last_c - first_c));
    check(exp_q.size() == 0, "flits missing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
