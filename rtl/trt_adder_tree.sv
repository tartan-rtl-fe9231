// trt_adder_tree: combinational N-input signed adder tree used inside a SIP.
//
// Sums N signed AW-bit terms as a balanced binary tree (pairs added level by level),
// wrapping modulo 2^AW. The paper specifies a 16-input adder tree per SIP; its
// internal structure (balanced binary) is this design's choice. Purely combinational.
module trt_adder_tree #(
  parameter int unsigned N  = 16,
  parameter int unsigned AW = 32
) (
  input  logic signed [AW-1:0] in [N],
  output logic signed [AW-1:0] sum
);
  localparam int unsigned LEVELS = (N <= 1) ? 1 : $clog2(N);
  localparam int unsigned NP     = 1 << LEVELS;

  logic signed [AW-1:0] lvl [LEVELS+1][NP];

  always_comb begin
    for (int i = 0; i < int'(NP); i++) lvl[0][i] = (i < int'(N)) ? in[i] : '0;
    for (int l = 1; l <= int'(LEVELS); l++) begin
      for (int i = 0; i < int'(NP); i++) begin
        if (i < int'(NP >> l)) lvl[l][i] = lvl[l-1][2*i] + lvl[l-1][2*i+1];
        else                   lvl[l][i] = '0;
      end
    end
  end

  assign sum = lvl[LEVELS][0];
endmodule
