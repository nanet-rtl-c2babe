// flit_fifo: small synchronous FIFO of router flits, used as the input
// buffer of each router port. DEPTH entries (a power of two), registered
// storage, first-word-fall-through read: the head flit is visible on
// rd_flit whenever rd_valid is high and leaves on rd_pop. One write and one
// read per clock; full and empty are derived from a count.
module flit_fifo
  import nanet_pkg::*;
#(
  parameter int DEPTH = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  flit_t wr_flit,
  input  logic  wr_valid,
  output logic  wr_ready,
  output flit_t rd_flit,
  output logic  rd_valid,
  input  logic  rd_pop
);
  localparam int AW = $clog2(DEPTH);
  flit_t          mem [DEPTH];
  logic [AW-1:0]  wp, rp;
  logic [AW:0]    count;
  logic           push, pop;

  assign wr_ready = count != (AW+1)'(DEPTH);
  assign rd_valid = count != '0;
  assign rd_flit  = mem[rp];
  assign push     = wr_valid && wr_ready;
  assign pop      = rd_pop && rd_valid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= wp + 1'b1;
      if (pop)  rp <= rp + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) if (push) mem[wp] <= wr_flit;
endmodule
