// tb_tx_block: self-checking test of the Network Interface transmit side.
// Random commands (destination port, length 0-300 bytes, tag) and their
// data beats are offered with random gaps; every flit leaving for the
// router is compared with the expected header and beats under random
// backpressure, and the packet counter is checked.
module tb_tx_block;
  import nanet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid = 0, cmd_ready; logic [3:0] cmd_dst_port = 0; logic [15:0] cmd_len = 0, cmd_tag = 0;
  logic [127:0] h_data = 0; logic h_valid = 0, h_ready;
  flit_t out_flit; logic out_valid, out_ready = 1; logic [31:0] cnt_pkts;

  tx_block #(.MY_PORT(4'd0)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  flit_t exp_q[$];
  logic took_c, took_h;
  always @(posedge clk) begin took_c <= cmd_valid && cmd_ready; took_h <= h_valid && h_ready; end

  always @(posedge clk) if (rst_n) begin
    out_ready <= ($urandom % 3 != 0);
    if (out_valid && out_ready) begin
      if (exp_q.size() == 0) check(0, "unexpected flit");
      else begin
        flit_t e; e = exp_q.pop_front();
        check(out_flit == e, "flit mismatch");
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
      int len, nf; logic [3:0] d; logic [15:0] t;
      len = ($urandom % 8 == 0) ? 0 : $urandom % 300; nf = (len + 15) / 16;
      d = 4'($urandom % 5); t = 16'($urandom);
      exp_q.push_back('{sop: 1'b1, eop: len == 0, data: make_hdr(d, 4'd0, 16'(len), t)});
      while ($urandom % 3 == 0) begin cmd_valid <= 0; @(posedge clk); #1; end
      cmd_valid <= 1; cmd_dst_port <= d; cmd_len <= 16'(len); cmd_tag <= t;
      do begin @(posedge clk); #1; end while (!took_c);
      if (nf > 0) cmd_valid <= 0;
      for (int k = 0; k < nf; k++) begin
        logic [127:0] x; x = {$urandom, $urandom, $urandom, $urandom};
        exp_q.push_back('{sop: 1'b0, eop: k == nf - 1, data: x});
        while ($urandom % 3 == 0) begin h_valid <= 0; @(posedge clk); #1; end
        h_valid <= 1; h_data <= x;
        do begin @(posedge clk); #1; end while (!took_h);
      end
      h_valid <= 0;
    end
    repeat (20) @(posedge clk);
    check(exp_q.size() == 0, "flits missing");
    check(cnt_pkts == 32'd100, "packet counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
