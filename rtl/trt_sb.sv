// trt_sb: synapse buffer (SB) of one tile, the per-tile weight memory.
//
// The paper gives each tile a 2 MB eDRAM synapse buffer that delivers 256 16-bit
// weights (4096 bits) per cycle, 256 wires for each of the 16 SIP rows. It is
// modelled here as a synchronous memory of DEPTH rows of 4096 bits (4096 rows =
// 2 MB by default): one read port that returns a whole row one cycle after rd_en,
// and one write port that writes a 256-bit slice (slot 0..15 of a row), used by
// the host to fill the buffer before a layer runs. The eDRAM macro itself, its
// refresh and banking are not modelled; the row width and capacity follow the
// paper, the port arrangement and the one-cycle read latency are this design's
// choice. The read data register holds its value while rd_en is low.
module trt_sb #(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned RW    = 4096,
  parameter int unsigned SW    = 256,
  localparam int unsigned AW   = (DEPTH <= 1) ? 1 : $clog2(DEPTH),
  localparam int unsigned NSLOT = RW / SW
) (
  input  logic                     clk,
  input  logic                     rd_en,
  input  logic [AW-1:0]            rd_addr,
  output logic [RW-1:0]            rd_data,
  input  logic                     wr_en,
  input  logic [AW-1:0]            wr_addr,
  input  logic [$clog2(NSLOT)-1:0] wr_slot,
  input  logic [SW-1:0]            wr_data
);
  logic [RW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr][wr_slot*SW +: SW] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
