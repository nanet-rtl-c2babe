// tb_nanet_ctrl_tx: self-checking test of APEnet+ decapsulation.
// Random packets (header with length and tag, 0-300 payload bytes padded to
// whole flits, plus a stray payload flit that must be ignored) enter with
// random gaps; the 32-bit payload words, sop/eop, empty byte count, length
// and tag are checked under random backpressure.
module tb_nanet_ctrl_tx;
  import nanet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  flit_t in_flit = '0; logic in_valid = 0, in_ready;
  logic [31:0] pl_data; logic pl_valid, pl_sop, pl_eop, pl_ready = 1; logic [1:0] pl_empty;
  logic [15:0] pl_len, pl_tag;

  nanet_ctrl_tx dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  typedef struct { logic [31:0] d; bit sop, eop; logic [1:0] empty; logic [15:0] len, tag; } w_t;
  w_t exp_q[$];
  logic took;
  always @(posedge clk) took <= in_valid && in_ready;

  task automatic put(flit_t x);
    while ($urandom % 4 == 0) begin in_valid <= 0; @(posedge clk); #1; end
    in_valid <= 1; in_flit <= x;
    do begin @(posedge clk); #1; end while (!took);
  endtask

  always @(posedge clk) if (rst_n) begin
    pl_ready <= ($urandom % 3 != 0);
    if (pl_valid && pl_ready) begin
      if (exp_q.size() == 0) check(0, "unexpected word");
      else begin
        w_t e; e = exp_q.pop_front();
        check(pl_data == e.d && pl_sop == e.sop && pl_eop == e.eop, $sformatf("word %h exp %h", pl_data, e.d));
        if (e.sop) check(pl_len == e.len && pl_tag == e.tag, "length/tag");
        if (e.eop) check(pl_empty == e.empty, "empty");
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    for (int n = 0; n < 100; n++) begin
      int len, nf, nw; logic [15:0] tag;
      len = ($urandom % 10 == 0) ? 0 : 1 + $urandom % 300; nf = (len + 15) / 16; nw = (len + 3) / 4;
      tag = 16'($urandom);
      if (n % 17 == 5) put('{sop: 1'b0, eop: 1'b1, data: '1});   // stray flit, ignored
      put('{sop: 1'b1, eop: len == 0, data: make_hdr(4'd1, 4'd0, 16'(len), tag)});
      for (int f = 0; f < nf; f++) begin
        flit_t x; x.sop = 0; x.eop = (f == nf - 1); x.data = {$urandom, $urandom, $urandom, $urandom};
        for (int k = 0; k < 4; k++) if (4*f + k < nw)
          exp_q.push_back('{{x.data[32*k +: 8], x.data[32*k+8 +: 8], x.data[32*k+16 +: 8], x.data[32*k+24 +: 8]}, 4*f + k == 0, 4*f + k == nw - 1,
                            2'((4 - len % 4) % 4), 16'(len), tag});
        put(x);
      end
    end
    in_valid <= 0;
    repeat (100) @(posedge clk);
    check(exp_q.size() == 0, "words missing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
