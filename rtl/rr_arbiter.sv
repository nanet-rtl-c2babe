// rr_arbiter: N-way round-robin arbiter used by each router output.
// Combinational one-hot grant among the requests, searching from the input
// after the one granted last; the pointer moves only when `advance` is high
// (the grant was taken), so a request that is not served keeps its turn.
module rr_arbiter #(
  parameter int N = 5
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] gnt
);
  logic [$clog2(N)-1:0] last;

  always_comb begin
    gnt = '0;
    for (int k = 1; k <= N; k++) begin
      int idx;
      idx = (int'(last) + k) % N;
      if (req[idx] && gnt == '0) gnt[idx] = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) last <= $clog2(N)'(N-1);
    else if (advance)
      for (int k = 0; k < N; k++) if (gnt[k]) last <= $clog2(N)'(k);
  end
endmodule
