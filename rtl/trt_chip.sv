// trt_chip: Tartan accelerator top level.
//
// Tartan computes convolutional and fully-connected layers with a run time that
// scales with the number of bits used per layer: activations are processed one
// bit per cycle, and for fully-connected layers the weights are also loaded one
// bit per cycle. The chip holds, as in the paper's system figure, a central
// neuron memory (NM), a dispatcher, N_TILES processing tiles each with its own
// synapse buffer (SB) and reducer, and one 256-bit global bus shared by the
// dispatcher's activation broadcast and the reducers' writes to NM. A controller
// drives all tiles in lockstep.
//
// Use: with start low, the host fills NM (host_nm_*) and the synapse buffers
// (host_sb_*), sets cfg (trt_pkg::layer_cfg_t) and pulses start. busy stays high
// until every output brick has been written to NM; done pulses once at the end.
// The host then reads NM rows through host_rd_*. Host ports must be idle while
// busy. Memory layouts are described in trt_pkg. The off-chip memory that would
// feed these host ports is outside the design.
// Status counters (reset at start): stall_nbin (compute cycles lost waiting for
// activation planes), stall_nbout (units waiting for a free NBout entry),
// disp_starved (cycles the dispatcher had nothing to send), red_cycles (cascade
// reduction cycles), bus_red_writes (bricks written by reducers), cycles.
// Follows the paper: block set, 16 tiles, 2 MB NM, 2 MB SB per tile, 256-bit bus.
// This design's choice: host ports, bus arbitration rule, control encoding.
module trt_chip
  import trt_pkg::*;
#(
  parameter int unsigned N_TILES     = 16,
  parameter int unsigned SB_DEPTH    = 4096,
  parameter int unsigned NM_ROWS     = 4096,
  parameter int unsigned NBIN_DEPTH  = 32,
  parameter int unsigned NBOUT_DEPTH = 2,
  localparam int unsigned SAW        = (SB_DEPTH <= 1) ? 1 : $clog2(SB_DEPTH),
  localparam int unsigned RAW        = (NM_ROWS <= 1) ? 1 : $clog2(NM_ROWS),
  localparam int unsigned TW         = (N_TILES <= 1) ? 1 : $clog2(N_TILES)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  layer_cfg_t         cfg,
  input  logic               start,
  output logic               busy,
  output logic               done,
  // host access to the neuron memory
  input  logic               host_nm_wr,
  input  logic [RAW-1:0]     host_nm_row,
  input  logic [3:0]         host_nm_slot,
  input  logic [BUS_W-1:0]   host_nm_data,
  input  logic               host_rd_en,
  input  logic [RAW-1:0]     host_rd_row,
  output logic [ROW_W-1:0]   host_rd_data,
  // host access to the synapse buffers
  input  logic               host_sb_wr,
  input  logic [TW-1:0]      host_sb_tile,
  input  logic [SAW-1:0]     host_sb_row,
  input  logic [3:0]         host_sb_slot,
  input  logic [BUS_W-1:0]   host_sb_data,
  // status
  output logic [31:0]        stall_nbin,
  output logic [31:0]        stall_nbout,
  output logic [31:0]        disp_starved,
  output logic [31:0]        red_cycles,
  output logic [31:0]        bus_red_writes,
  output logic [31:0]        cycles
);
  tile_cmd_t             cmd;
  logic                  ctrl_busy, ctrl_done, disp_busy;
  logic                  d_rd_en, d_req, d_gnt;
  logic [RAW-1:0]        d_rd_row;
  logic [ROW_W-1:0]      nm_q;
  logic [PLANE_W-1:0]    plane;
  logic [N_TILES-1:0]    t_nbin_empty, t_nbin_full, t_nbout_full, t_req, t_gnt, t_busy;
  baddr_t                t_addr [N_TILES];
  logic [BUS_W-1:0]      t_data [N_TILES];
  logic                  running;

  // ---- neuron memory: reducers (via the bus) or host write, dispatcher or host read
  logic                  nm_wr;
  logic [RAW-1:0]        nm_wr_row;
  logic [3:0]            nm_wr_slot;
  logic [BUS_W-1:0]      nm_wr_data;

  always_comb begin
    nm_wr      = host_nm_wr;
    nm_wr_row  = host_nm_row;
    nm_wr_slot = host_nm_slot;
    nm_wr_data = host_nm_data;
    for (int i = 0; i < int'(N_TILES); i++) begin
      if (t_gnt[i]) begin
        nm_wr      = 1'b1;
        nm_wr_row  = RAW'(t_addr[i] >> 4);
        nm_wr_slot = t_addr[i][3:0];
        nm_wr_data = t_data[i];
      end
    end
  end

  trt_nm #(.ROWS(NM_ROWS), .RW(ROW_W), .SW(BUS_W)) u_nm (
    .clk, .rd_en(running ? d_rd_en : host_rd_en), .rd_row(running ? d_rd_row : host_rd_row),
    .rd_data(nm_q), .wr_en(nm_wr), .wr_row(nm_wr_row), .wr_slot(nm_wr_slot),
    .wr_data(nm_wr_data));
  assign host_rd_data = nm_q;

  trt_dispatcher #(.N_TILES(N_TILES), .NM_ROWS(NM_ROWS)) u_disp (
    .clk, .rst_n, .cfg, .start, .nm_rd_en(d_rd_en), .nm_rd_row(d_rd_row), .nm_rd_data(nm_q),
    .nbin_full(|t_nbin_full), .bus_req(d_req), .bus_gnt(d_gnt), .plane,
    .busy(disp_busy), .starved(disp_starved));

  trt_bus_arbiter #(.N(N_TILES)) u_arb (
    .clk, .rst_n, .red_req(t_req), .red_gnt(t_gnt), .disp_req(d_req), .disp_gnt(d_gnt));

  trt_ctrl #(.N_TILES(N_TILES)) u_ctrl (
    .clk, .rst_n, .cfg, .start, .nbin_empty(|t_nbin_empty), .nbout_full(|t_nbout_full),
    .cmd, .busy(ctrl_busy), .done(ctrl_done), .stall_nbin, .stall_nbout, .red_cycles);

  for (genvar i = 0; i < int'(N_TILES); i++) begin : g_tile
    trt_tile #(.TILE(i), .N_TILES(N_TILES), .SB_DEPTH(SB_DEPTH),
               .NBIN_DEPTH(NBIN_DEPTH), .NBOUT_DEPTH(NBOUT_DEPTH)) u_tile (
      .clk, .rst_n, .cfg, .cmd,
      .nbin_push(d_gnt), .nbin_data(plane),
      .nbin_empty(t_nbin_empty[i]), .nbin_full(t_nbin_full[i]), .nbout_full(t_nbout_full[i]),
      .sb_wr_en(host_sb_wr && host_sb_tile == TW'(i)), .sb_wr_addr(host_sb_row),
      .sb_wr_slot(host_sb_slot), .sb_wr_data(host_sb_data),
      .red_req(t_req[i]), .red_addr(t_addr[i]), .red_data(t_data[i]), .red_gnt(t_gnt[i]),
      .busy(t_busy[i]));
  end

  // ---- run tracking
  logic ctrl_finished;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; ctrl_finished <= 1'b0; done <= 1'b0;
      cycles <= '0; bus_red_writes <= '0;
    end else begin
      done <= 1'b0;
      if (start && !running) begin
        running <= 1'b1; ctrl_finished <= 1'b0; cycles <= '0; bus_red_writes <= '0;
      end else if (running) begin
        cycles <= cycles + 1;
        if (|t_gnt) bus_red_writes <= bus_red_writes + 1;
        if (ctrl_done) ctrl_finished <= 1'b1;
        if (ctrl_finished && !ctrl_busy && !disp_busy && (t_busy == '0) && !(|t_req)) begin
          running <= 1'b0;
          done    <= 1'b1;
        end
      end
    end
  end
  assign busy = running;

  a_host_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                running |-> !(host_nm_wr || host_sb_wr));
endmodule
