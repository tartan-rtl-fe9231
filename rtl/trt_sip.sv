// trt_sip: serial inner-product unit (SIP) of a Tartan tile.
//
// Each cycle a SIP multiplies 16 activation bits, one bit of each of 16 activations,
// by 16 weights held in its Weight Register (WR), sums the 16 products in an adder
// tree and accumulates the sum, weighted by the bit's significance, into its output
// register OR. Over pa cycles (one per activation bit, MSB first) OR receives the
// 16-term inner product of full-precision weights and pa-bit activations.
//
// Registers: SWR (serial weight register) and WR (weight register), each 16
// subregisters of 16 bits. An SWR subregister is a shift register fed by one wire
// of the weight bus; it is used to load a different weight per SIP bit-serially
// for fully-connected layers. The first bit shifted in (the weight's MSB) is
// copied into every bit so the weight ends up sign-extended. WR is loaded either
// in parallel from the 16-weight bus (convolutional layers) or from SWR (fully-
// connected layers). The copy from SWR takes the SWR value as it is at the end of
// the cycle, so the last serial bit and the copy can share one cycle.
//
// Datapath per cycle with acc_en:
//   term_j = act_bits[j] ? (neg ? -WR_j : WR_j) : 0      (AND gate + negation block)
//   term_0 is replaced by casc_in when casc_sel           (cascade multiplexer)
//   OR    <= (msb ? nbout_in : OR) + (sum_j term_j << bitpos)
// The MSB plane selects i_nbout as the starting value, as the paper's SIP figure
// shows; the tile drives it with zero, with OR itself or with an NBout entry.
// Output: out = (pool_sel ? max(OR, nbout_in) : OR) <<< prec (max comparator and
// output shifter of the figure). or_q is OR itself and feeds the next SIP's
// cascade input.
//
// Follows the paper: SWR/WR organisation and the CONV multiplexer, AND gates,
// negation on the MSB for two's-complement activations, cascade multiplexer at the
// first adder-tree input, final adder, max comparator, output shift by prec.
// This design's choice: the paper's figure shows a fixed <<1 on the OR feedback; here
// the shift is applied to the adder-tree sum (by bitpos) instead, which gives the
// same result for a single pass but keeps a partial sum loaded through i_nbout
// unscaled. Accumulator width ACC_W (32) is assumed.
// Timing: all registers update on the rising clock edge (asynchronous active-low
// reset, assumed); or_q is OR itself, out is combinational from OR and nbout_in.
module trt_sip #(
  parameter int unsigned LANES = 16,
  parameter int unsigned WW    = 16,
  parameter int unsigned AW    = 32
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // weight loading
  input  logic [LANES-1:0]               swr_bits,   // one weight-bus wire per SWR subregister
  input  logic                           swr_shift,
  input  logic                           swr_first,
  input  logic [LANES-1:0][WW-1:0]       w_bus,      // 16 parallel weights
  input  logic                           wr_load,
  input  logic                           wr_conv,    // 1: WR <= w_bus, 0: WR <= SWR
  // bit-serial compute
  input  logic [LANES-1:0]               act_bits,
  input  logic                           acc_en,
  input  logic                           msb,
  input  logic                           neg,
  input  logic [3:0]                     bitpos,
  input  logic                           casc_sel,
  input  logic signed [AW-1:0]           casc_in,
  input  logic signed [AW-1:0]           nbout_in,
  // output stage
  input  logic                           pool_sel,
  input  logic [4:0]                     prec,
  output logic signed [AW-1:0]           or_q,
  output logic signed [AW-1:0]           out
);

  logic [LANES-1:0][WW-1:0] swr_q, swr_d, wr_q;
  logic signed [AW-1:0]     terms [LANES];
  logic signed [AW-1:0]     tree_sum;
  logic signed [AW-1:0]     acc_base;

  // SWR: shift in one bit per subregister, sign-fill on the first bit
  always_comb begin
    swr_d = swr_q;
    if (swr_shift) begin
      for (int j = 0; j < int'(LANES); j++) begin
        if (swr_first) swr_d[j] = {WW{swr_bits[j]}};
        else           swr_d[j] = {swr_q[j][WW-2:0], swr_bits[j]};
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      swr_q <= '0;
      wr_q  <= '0;
    end else begin
      swr_q <= swr_d;
      if (wr_load) wr_q <= wr_conv ? w_bus : swr_d;
    end
  end

  // AND gates, negation blocks and the cascade multiplexer
  always_comb begin
    for (int j = 0; j < int'(LANES); j++) begin
      logic signed [AW-1:0] wx;
      wx = AW'(signed'(wr_q[j]));
      if (!act_bits[j])  terms[j] = '0;
      else if (neg)      terms[j] = -wx;
      else               terms[j] = wx;
    end
    if (casc_sel) terms[0] = casc_in;
  end

  trt_adder_tree #(.N(LANES), .AW(AW)) u_tree (.in(terms), .sum(tree_sum));

  assign acc_base = msb ? nbout_in : or_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) or_q <= '0;
    else if (acc_en) or_q <= acc_base + (tree_sum <<< bitpos);
  end

  // max comparator and output shifter
  logic signed [AW-1:0] sel;
  assign sel = (pool_sel && (nbout_in > or_q)) ? nbout_in : or_q;
  assign out = sel <<< prec;

endmodule
