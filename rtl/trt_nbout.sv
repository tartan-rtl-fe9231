// trt_nbout: output neuron buffer (NBout) of one tile.
//
// Holds the output activations of the SIP grid, one ACC_W-bit value per SIP
// (16 columns x 16 rows), for up to DEPTH work units. The entry at the write
// pointer is "open": the controller writes all 256 SIP outputs into it with wr
// (several times for a pooling pass, which keeps a running maximum) and then
// closes it with commit, which attaches the unit label and hands it to the
// reducer. cur shows the open entry so the SIPs can compare against it. The
// reducer reads the oldest closed entry one column (16 values, one brick) at a
// time through rd_col/rd_vals and frees it with pop. The paper keeps NBout as in
// DaDianNao but distributes it along the SIPs; this storage-per-unit organisation
// and DEPTH = 2 (double buffering) are this design's choice. Writes and commits
// take effect at the clock edge; rd_vals and cur are combinational reads.
module trt_nbout
  import trt_pkg::*;
#(
  parameter int unsigned DEPTH = 2,
  localparam int unsigned PW   = (DEPTH <= 1) ? 1 : $clog2(DEPTH)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    wr,
  input  logic signed [ACC_W-1:0] wr_vals [COLS][ROWS],
  input  logic                    commit,
  input  unit_t                   commit_unit,
  output logic signed [ACC_W-1:0] cur [COLS][ROWS],
  input  logic [3:0]              rd_col,
  output logic signed [ACC_W-1:0] rd_vals [ROWS],
  output unit_t                   rd_unit,
  input  logic                    pop,
  output logic                    empty,
  output logic                    full,
  output logic [PW:0]             count
);
  logic signed [ACC_W-1:0] mem [DEPTH][COLS][ROWS];
  unit_t                   lbl [DEPTH];
  logic [PW-1:0]           wp, rp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (commit) wp <= (wp == PW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (pop)    rp <= (rp == PW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (PW+1)'(commit) - (PW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (wr) mem[wp] <= wr_vals;
    if (commit) lbl[wp] <= commit_unit;
  end

  assign cur     = mem[wp];
  assign rd_vals = mem[rp][rd_col];
  assign rd_unit = lbl[rp];
  assign empty   = (count == 0);
  assign full    = (count == (PW+1)'(DEPTH));

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !((wr || commit) && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
