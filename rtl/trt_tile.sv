// trt_tile: one Tartan processing tile.
//
// A 16 x 16 grid of SIPs. SIP(r, c) sits in row r (filter lane r) and column c
// (window lane c). Connections, as in the paper's tile figure:
//   * weight bus: the synapse buffer (SB) delivers a 4096-bit row, 256 wires per
//     SIP row. For a convolutional layer every SIP of row r loads the same 16
//     weights (wires r*256 .. r*256+255) in parallel into its WR. For a fully-
//     connected layer SWR subregister j of SIP(r, c) takes the single wire
//     r*256 + c*16 + j, so each SIP loads 16 different weights bit-serially.
//   * activations: NBin delivers 256 activation bit lanes; column c takes lanes
//     c*16 .. c*16+15 (one bit of each activation of window lane c).
//   * cascade: SIP(r, c) receives OR of SIP(r, c-1) at its cascade multiplexer.
//   * NBout: every SIP's output goes to its own NBout slot; the reducer drains
//     NBout one column (brick) at a time through the activation function unit.
// The tile follows the controller's tile_cmd_t, delayed by one register stage so
// that it lines up with the SB read data and with the NBin plane popped in the
// same cycle. NBin receives bit-planes broadcast on the global bus.
// i_nbout of each SIP is driven from zero, its own OR, or its NBout slot, as the
// command says; reduction cycles enable the SIPs at slice position red_j.
// Follows the paper: grid shape, wiring of weight buses and activation lanes,
// cascade chain along rows, NBout at the SIP outputs, activation function at the
// NBout output, one reducer per tile. The command pipeline register, NBout
// organisation and SB port arrangement are this design's choice.
module trt_tile
  import trt_pkg::*;
#(
  parameter int unsigned TILE        = 0,
  parameter int unsigned N_TILES     = 16,
  parameter int unsigned SB_DEPTH    = 4096,
  parameter int unsigned NBIN_DEPTH  = 32,
  parameter int unsigned NBOUT_DEPTH = 2,
  localparam int unsigned SAW        = (SB_DEPTH <= 1) ? 1 : $clog2(SB_DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  layer_cfg_t         cfg,
  input  tile_cmd_t          cmd,
  // activation bit-planes from the dispatcher
  input  logic               nbin_push,
  input  logic [PLANE_W-1:0] nbin_data,
  output logic               nbin_empty,
  output logic               nbin_full,
  output logic               nbout_full,
  // host fill port of the synapse buffer
  input  logic               sb_wr_en,
  input  logic [SAW-1:0]     sb_wr_addr,
  input  logic [3:0]         sb_wr_slot,
  input  logic [BUS_W-1:0]   sb_wr_data,
  // reducer toward the bus / NM
  output logic               red_req,
  output baddr_t             red_addr,
  output logic [BUS_W-1:0]   red_data,
  input  logic               red_gnt,
  output logic               busy
);
  tile_cmd_t            c1;
  logic [PLANE_W-1:0]   plane_q, nbin_rd;
  logic [ROW_W-1:0]     sb_q;
  logic [4:0]           npv;
  logic [COLS-1:0]      red_sel;

  trt_nbin #(.WIDTH(PLANE_W), .DEPTH(NBIN_DEPTH)) u_nbin (
    .clk, .rst_n, .push(nbin_push), .wr_data(nbin_data), .pop(cmd.comp),
    .rd_data(nbin_rd), .empty(nbin_empty), .full(nbin_full), .count());

  trt_sb #(.DEPTH(SB_DEPTH), .RW(ROW_W), .SW(BUS_W)) u_sb (
    .clk, .rd_en(cmd.sb_rd), .rd_addr(SAW'(cmd.sb_addr)), .rd_data(sb_q),
    .wr_en(sb_wr_en), .wr_addr(sb_wr_addr), .wr_slot(sb_wr_slot), .wr_data(sb_wr_data));

  // command stage aligned with SB data
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c1      <= '0;
      plane_q <= '0;
    end else begin
      c1      <= cmd;
      plane_q <= cmd.comp ? nbin_rd : '0;
    end
  end

  assign npv = (cfg.np == 0) ? 5'd1 : cfg.np;
  always_comb begin
    for (int c = 0; c < int'(COLS); c++)
      red_sel[c] = c1.red && (5'(c) % npv == 5'(c1.red_j)) && (5'(c) < 5'(n_slices(cfg) * npv));
  end

  logic signed [ACC_W-1:0] or_q    [ROWS][COLS];
  logic signed [ACC_W-1:0] sip_out [COLS][ROWS];
  logic signed [ACC_W-1:0] nb_cur  [COLS][ROWS];

  for (genvar r = 0; r < int'(ROWS); r++) begin : g_row
    for (genvar c = 0; c < int'(COLS); c++) begin : g_col
      logic [BRICK-1:0]        swr_bits;
      logic [BRICK-1:0][W-1:0] w_bus;
      logic signed [ACC_W-1:0] nb_in, casc_in;
      always_comb begin
        for (int j = 0; j < int'(BRICK); j++) begin
          swr_bits[j] = sb_q[r*BUS_W + c*BRICK + j];
          w_bus[j]    = sb_q[r*BUS_W + j*W +: W];
        end
        unique case (c1.nb_src)
          NB_SELF: nb_in = or_q[r][c];
          NB_BUF:  nb_in = nb_cur[c][r];
          default: nb_in = '0;
        endcase
      end
      if (c == 0) begin : g_first
        assign casc_in = '0;
      end else begin : g_next
        assign casc_in = or_q[r][c-1];
      end
      trt_sip #(.LANES(BRICK), .WW(W), .AW(ACC_W)) u_sip (
        .clk, .rst_n,
        .swr_bits, .swr_shift(c1.swr_shift), .swr_first(c1.swr_first),
        .w_bus, .wr_load(c1.wr_load), .wr_conv(c1.wr_conv),
        .act_bits(plane_q[c*BRICK +: BRICK]),
        .acc_en(c1.comp || red_sel[c]), .msb(c1.msb), .neg(c1.neg),
        .bitpos(red_sel[c] ? 4'd0 : c1.bitpos),
        .casc_sel(red_sel[c]), .casc_in, .nbout_in(nb_in),
        .pool_sel(c1.nb_max), .prec(cfg.prec),
        .or_q(or_q[r][c]), .out(sip_out[c][r]));
    end
  end

  // NBout, activation function unit and reducer
  logic [3:0]              rd_col;
  logic signed [ACC_W-1:0] rd_vals [ROWS];
  unit_t                   rd_unit;
  logic                    nb_pop, nb_empty;

  trt_nbout #(.DEPTH(NBOUT_DEPTH)) u_nbout (
    .clk, .rst_n, .wr(c1.nb_wr), .wr_vals(sip_out), .commit(c1.nb_commit),
    .commit_unit(c1.unit), .cur(nb_cur), .rd_col, .rd_vals, .rd_unit,
    .pop(nb_pop), .empty(nb_empty), .full(nbout_full), .count());

  trt_afu #(.LANES(ROWS), .AW(ACC_W), .OW(W)) u_afu (
    .in(rd_vals), .relu(cfg.relu), .shift(cfg.out_shift), .out(red_data));

  trt_reducer #(.TILE(TILE), .N_TILES(N_TILES)) u_red (
    .clk, .rst_n, .cfg, .nb_empty, .nb_unit(rd_unit), .rd_col, .nb_pop,
    .bus_req(red_req), .bus_addr(red_addr), .bus_gnt(red_gnt), .busy);
endmodule
