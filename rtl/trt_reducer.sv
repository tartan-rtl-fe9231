// trt_reducer: per-tile reducer that writes finished output activations to NM.
//
// When NBout holds a closed entry, the reducer walks its 16 columns. For each
// column it asks the layer geometry (trt_pkg::out_brick) whether the column holds
// a real output brick and where it goes in NM; columns that hold nothing (windows
// past the edge of the output, or the non-final SIPs of a cascade slice) are
// skipped in one cycle. For a real brick it raises bus_req with the brick's NM
// address; the brick data itself (16 values after the activation function unit)
// is driven by the tile from rd_col. Each granted cycle writes one brick. After
// column 15 the entry is popped. The paper states only that a reducer per tile
// collects output activations and writes them to NM over the shared bus; this
// column-by-column sequencing is this design's choice.
// Timing: one column per cycle when granted or skipped; req/addr are
// combinational from the current column and the entry label.
module trt_reducer
  import trt_pkg::*;
#(
  parameter int unsigned TILE    = 0,
  parameter int unsigned N_TILES = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  layer_cfg_t  cfg,
  input  logic        nb_empty,
  input  unit_t       nb_unit,
  output logic [3:0]  rd_col,
  output logic        nb_pop,
  output logic        bus_req,
  output baddr_t      bus_addr,
  input  logic        bus_gnt,
  output logic        busy
);
  logic [3:0] col;
  logic       ok, adv;

  always_comb begin
    ok      = out_brick(cfg, nb_unit, col, TILE, N_TILES, bus_addr);
    bus_req = !nb_empty && ok;
    adv     = !nb_empty && (!ok || bus_gnt);
    nb_pop  = adv && (col == 4'd15);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) col <= '0;
    else if (adv) col <= col + 4'd1;
  end

  assign rd_col = col;
  assign busy   = !nb_empty;
endmodule
