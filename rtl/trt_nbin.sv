// trt_nbin: input neuron buffer (NBin) of one tile.
//
// In Tartan the NBin holds activations bit-serially: 256 activation bit lanes,
// 16 per window lane (SIP column). The dispatcher broadcasts one 256-bit bit-plane
// per bus transfer (bit k of each of the 256 activations it is sending); NBin
// queues the planes and hands one to the SIP array per compute cycle. It is a
// first-word-fall-through FIFO of DEPTH planes: rd_data shows the oldest plane
// whenever empty is low, and pop removes it at the clock edge. Push while full
// and pop while empty are errors (checked by assertions). The 256-lane width
// follows the paper (its tile figure); the FIFO organisation and DEPTH (32 planes,
// two full 16-bit bricks sets) are this design's choice.
module trt_nbin #(
  parameter int unsigned WIDTH = 256,
  parameter int unsigned DEPTH = 32,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             pop,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             full,
  output logic [AW:0]      count
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) if (push) mem[wp] <= wr_data;

  assign rd_data = mem[rp];
  assign empty   = (count == 0);
  assign full    = (count == (AW+1)'(DEPTH));

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
