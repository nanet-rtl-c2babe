// tb_router: self-checking test of the crossbar router.
// Every port sends random packets (0-6 payload flits) to random outputs,
// some to a port that does not exist, all at the same time with random
// gaps and random output backpressure. Each payload flit carries its source,
// sequence number and index. Every output checks that packets arrive whole
// and uninterleaved, in order for each source, with the right contents; the
// misrouted counter must equal the number of bad headers sent. The test
// also counts output arbitration conflicts (two inputs wanting one output
// in the same cycle) and checks the two-cycle header latency of an idle
// router.
module tb_router;
  import nanet_pkg::*;
  localparam int N = 5;
  localparam int NPKT = 60;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  flit_t in_flit[N]; logic in_valid[N], in_ready[N];
  flit_t out_flit[N]; logic out_valid[N], out_ready[N];
  logic [31:0] cnt_misrouted;

  router #(.NPORTS(N), .DEPTH(4)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  flit_t expq[N][N][$];      // [src][dst]
  int    n_bad = 0, done_src = 0, conflicts = 0;
  bit    bp = 1;

  function automatic logic [FLIT_W-1:0] pay(int src, int seq, int k);
    return {32'(src), 32'(seq), 32'(k), 32'hC0FFEE00 ^ 32'(src*1000 + seq*10 + k)};
  endfunction

  for (genvar i = 0; i < N; i++) begin : g_src
    flit_t f; logic v, took;
    assign in_flit[i] = f; assign in_valid[i] = v;
    always @(posedge clk) took <= v && in_ready[i];
    initial begin
      v = 0; f = '0;
      wait (rst_n); @(posedge clk); #1;
      for (int s = 0; s < NPKT; s++) begin
        int dst, nf;
        dst = ($urandom % 12 == 0) ? N + ($urandom % 3) : $urandom % N;
        nf = $urandom % 7;
        if (dst >= N) n_bad++;
        for (int k = 0; k <= nf; k++) begin
          flit_t x;
          x.sop = (k == 0); x.eop = (k == nf);
          x.data = (k == 0) ? make_hdr(4'(dst), 4'(i), 16'(nf * 16), 16'(s)) : pay(i, s, k);
          if (dst < N) expq[i][dst].push_back(x);
          while ($urandom % 3 == 0) begin v <= 0; @(posedge clk); #1; end
          v <= 1; f <= x;
          do begin @(posedge clk); #1; end while (!took);
        end
      end
      v <= 0;
      done_src++;
    end
  end

  for (genvar o = 0; o < N; o++) begin : g_dst
    int cur_src = -1;
    always @(posedge clk) if (rst_n) begin
      out_ready[o] <= bp ? ($urandom % 4 != 0) : 1'b1;
      if (out_valid[o] && out_ready[o]) begin
        if (out_flit[o].sop) begin
          apenet_hdr_t h; h = apenet_hdr_t'(out_flit[o].data);
          check(cur_src == -1, "packet started inside another packet");
          check(int'(h.dst_port) == o, "packet on wrong output");
          cur_src = int'(h.src_port);
        end
        if (cur_src < 0 || cur_src >= N) check(0, "flit with no packet");
        else if (expq[cur_src][o].size() == 0) check(0, "unexpected flit");
        else begin
          flit_t e; e = expq[cur_src][o].pop_front();
          check(out_flit[o] == e, $sformatf("out %0d src %0d: flit mismatch", o, cur_src));
        end
        if (out_flit[o].eop) cur_src = -1;
      end
    end
  end

  always @(posedge clk) if (rst_n)
    for (int o = 0; o < N; o++) if ($countones(dut.req[o]) > 1) conflicts++;

  initial begin
    repeat (200000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int t0, t1;
    for (int o = 0; o < N; o++) out_ready[o] = 1;
    repeat (3) @(posedge clk); rst_n = 1;
    wait (done_src == N);
    repeat (100) @(posedge clk);
    for (int s = 0; s < N; s++) for (int d = 0; d < N; d++)
      check(expq[s][d].size() == 0, $sformatf("flits from %0d to %0d lost", s, d));
    check(cnt_misrouted == 32'(n_bad), $sformatf("misrouted %0d exp %0d", cnt_misrouted, n_bad));
    check(conflicts > 0, "no output conflict was exercised");
    // latency of a header through an idle router
    bp = 0; repeat (3) @(posedge clk); #1;
    g_src[2].f = '{sop: 1'b1, eop: 1'b1, data: make_hdr(4'd4, 4'd2, 16'd0, 16'd99)};
    g_src[2].v = 1;
    @(posedge clk); t0 = $time; #1; g_src[2].v = 0;
    expq[2][4].push_back(g_src[2].f);
    while (!(out_valid[4] && out_ready[4])) @(posedge clk);
    t1 = $time;
    check((t1 - t0) == 2 * 10, $sformatf("header latency %0d ns", t1 - t0));
    repeat (3) @(posedge clk);
    $display("conflicts=%0d misrouted=%0d", conflicts, n_bad);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
