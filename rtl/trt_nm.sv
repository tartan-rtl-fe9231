// trt_nm: central neuron memory (NM) shared by all tiles.
//
// The paper's NM is a 2 MB eDRAM holding every inter-layer activation array.
// Here it is a synchronous memory of ROWS rows of 4096 bits (16 bricks of 256
// bits; 4096 rows = 2 MB by default). The read port returns a whole row one cycle
// after rd_en: these are the wide, eDRAM-friendly accesses the dispatcher makes.
// The write port writes one 256-bit brick (slot 0..15 of a row) per cycle, which
// is what the 256-bit interconnect delivers from a reducer or from the host.
// Capacity follows the paper; the row width, the one-read/one-write port
// arrangement and the one-cycle read latency are this design's choice.
module trt_nm #(
  parameter int unsigned ROWS = 4096,
  parameter int unsigned RW   = 4096,
  parameter int unsigned SW   = 256,
  localparam int unsigned AW   = (ROWS <= 1) ? 1 : $clog2(ROWS),
  localparam int unsigned NSLOT = RW / SW
) (
  input  logic                     clk,
  input  logic                     rd_en,
  input  logic [AW-1:0]            rd_row,
  output logic [RW-1:0]            rd_data,
  input  logic                     wr_en,
  input  logic [AW-1:0]            wr_row,
  input  logic [$clog2(NSLOT)-1:0] wr_slot,
  input  logic [SW-1:0]            wr_data
);
  logic [RW-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row][wr_slot*SW +: SW] <= wr_data;
    if (rd_en) rd_data <= mem[rd_row];
  end
endmodule
