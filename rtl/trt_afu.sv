// trt_afu: activation function unit at the output of a tile's NBout.
//
// Converts LANES accumulator values (ACC_W bits, two's complement) into 16-bit
// output activations before they are written back to the neuron memory. For each
// lane: optional ReLU (negative values become 0), arithmetic right shift by
// `shift` to drop fractional bits, then saturation to the signed 16-bit range.
// The paper only says that a unit applying the non-linear activation sits at the
// output of NBout; the choice of ReLU, the shift and the saturation are this
// design's. Purely combinational.
module trt_afu #(
  parameter int unsigned LANES = 16,
  parameter int unsigned AW    = 32,
  parameter int unsigned OW    = 16
) (
  input  logic signed [AW-1:0] in  [LANES],
  input  logic                 relu,
  input  logic [4:0]           shift,
  output logic [LANES*OW-1:0]  out
);
  localparam logic signed [AW-1:0] MAXV = AW'((1 << (OW-1)) - 1);
  localparam logic signed [AW-1:0] MINV = -AW'(1 << (OW-1));

  always_comb begin
    for (int i = 0; i < int'(LANES); i++) begin
      logic signed [AW-1:0] v;
      v = in[i];
      if (relu && v < 0) v = '0;
      v = v >>> shift;
      if (v > MAXV)      v = MAXV;
      else if (v < MINV) v = MINV;
      out[i*OW +: OW] = v[OW-1:0];
    end
  end
endmodule
