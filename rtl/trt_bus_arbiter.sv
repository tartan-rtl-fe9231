// trt_bus_arbiter: owner selection for the 256-bit global interconnect.
//
// In Tartan one 256-bit bus links the central neuron memory, the dispatcher, the
// tiles and one reducer per tile: the dispatcher broadcasts activation bit-planes
// to every tile's NBin, and the reducers write finished output bricks to NM. This
// arbiter grants the bus to one requester per cycle. Reducer writes go first, in
// round-robin order starting after the last reducer served; the dispatcher gets
// the bus in any cycle no reducer asks for it (its planes are buffered in NBin,
// so it can run ahead). The bus width and the sharing follow the paper's system
// figure; the priority rule is this design's choice. Grants are combinational
// from the requests; the round-robin pointer advances on the clock edge of a
// reducer grant.
module trt_bus_arbiter #(
  parameter int unsigned N = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] red_req,
  output logic [N-1:0] red_gnt,
  input  logic         disp_req,
  output logic         disp_gnt
);
  localparam int unsigned IW = (N <= 1) ? 1 : $clog2(N);
  logic [IW-1:0] last;

  always_comb begin
    red_gnt = '0;
    for (int k = 1; k <= int'(N); k++) begin
      if (red_req[(int'(last) + k) % int'(N)] && red_gnt == '0) red_gnt[(int'(last) + k) % int'(N)] = 1'b1;
    end
    disp_gnt = disp_req && (red_req == '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last <= IW'(N-1);
    else begin
      for (int i = 0; i < int'(N); i++) if (red_gnt[i]) last <= IW'(i);
    end
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0({red_gnt, disp_gnt}));
endmodule
