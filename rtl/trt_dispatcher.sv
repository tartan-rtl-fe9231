// trt_dispatcher: reads activation bricks from NM and broadcasts them bit-serially.
//
// For every step of every work unit (same loop order as trt_ctrl) each of the 16
// window lanes (SIP columns) needs one activation brick (trt_pkg::act_brick):
// 16 different windows for a convolutional layer, the same brick for all lanes of
// a fully-connected layer, or consecutive bricks across a cascade slice. The
// dispatcher fetches the set with wide NM reads: it reads the NM row holding the
// lowest-numbered brick still missing and takes from that 4096-bit row every
// brick of the set that lies in it, so a set of neighbouring windows costs one or
// two reads. Lanes with no brick get zeros. The set is kept in a "next" pool
// while the "current" pool is being sent (double buffering).
// Sending transposes the current pool: plane k (k = 0..pa-1) holds bit pa-1-k of
// each of the 256 activations, activation j of lane c on bus bit c*16+j, MSB plane
// first. One plane is sent per bus grant, only while NBin has room.
// Only the low pa bits of each stored activation are sent; values are expected to
// fit in pa bits (two's complement when the layer is signed).
// The paper specifies the dispatcher's job (wide NM reads, a pool of bricks from
// different windows, transposition, one bit per activation per transfer); the
// fetch order, the two pools and the bus handshake are this design's choice.
// NM reads have one cycle of latency, so a fetch takes two cycles per NM row.
// `starved` counts cycles in which the bus could take a plane but none was ready.
module trt_dispatcher
  import trt_pkg::*;
#(
  parameter int unsigned N_TILES = 16,
  parameter int unsigned NM_ROWS = 4096,
  localparam int unsigned RAW    = (NM_ROWS <= 1) ? 1 : $clog2(NM_ROWS)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  layer_cfg_t          cfg,
  input  logic                start,
  // NM read port
  output logic                nm_rd_en,
  output logic [RAW-1:0]      nm_rd_row,
  input  logic [ROW_W-1:0]    nm_rd_data,
  // bus toward the tiles' NBins
  input  logic                nbin_full,
  output logic                bus_req,
  input  logic                bus_gnt,
  output logic [PLANE_W-1:0]  plane,
  output logic                busy,
  output logic [31:0]         starved
);
  typedef enum logic [1:0] {F_IDLE, F_LOAD, F_ISSUE, F_WAIT} fstate_e;
  fstate_e             fst;
  pos_t                pos;
  logic                fetch_done;
  logic [COLS-1:0]     rem;
  logic [RAW-1:0]      issued_row;
  logic [BUS_W-1:0]    nxt [COLS];
  logic [BUS_W-1:0]    cur [COLS];
  logic                nxt_full, cur_valid;
  logic [4:0]          k;

  logic [COLS-1:0]     vmask;
  baddr_t              addr [COLS];
  logic                have_first;
  logic [3:0]          first_c;
  pos_t                pnext;
  logic                ls, lu;
  logic                move, send;

  always_comb begin
    for (int c = 0; c < int'(COLS); c++) vmask[c] = act_brick(cfg, pos, 4'(c), addr[c]);
    have_first = 1'b0;
    first_c    = '0;
    for (int c = int'(COLS) - 1; c >= 0; c--) begin
      if (rem[c]) begin
        have_first = 1'b1;
        first_c    = 4'(c);
      end
    end
    pnext = next_pos(cfg, pos, N_TILES, ls, lu);
  end

  assign nm_rd_en  = (fst == F_ISSUE) && !nxt_full && have_first;
  assign nm_rd_row = RAW'(addr[first_c] >> 4);

  // sending side
  always_comb begin
    for (int c = 0; c < int'(COLS); c++)
      for (int a = 0; a < int'(BRICK); a++)
        plane[c*BRICK + a] = cur[c][a*W + int'(5'(cfg.pa - 5'd1 - k))];
  end
  assign bus_req = cur_valid && !nbin_full;
  assign send    = bus_req && bus_gnt;
  assign move    = nxt_full && (!cur_valid || (send && k == cfg.pa - 5'd1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fst <= F_IDLE; pos <= '0; fetch_done <= 1'b1; rem <= '0; issued_row <= '0;
      nxt_full <= 1'b0; cur_valid <= 1'b0; k <= '0; starved <= '0;
    end else begin
      // fetch side
      unique case (fst)
        F_IDLE: if (start) begin
          pos <= '0; fetch_done <= 1'b0; fst <= F_LOAD; starved <= '0;
        end
        F_LOAD: if (!nxt_full) begin
          rem <= vmask;
          for (int c = 0; c < int'(COLS); c++) if (!vmask[c]) nxt[c] <= '0;
          fst <= F_ISSUE;
        end
        F_ISSUE: if (!nxt_full) begin
          if (have_first) begin
            issued_row <= nm_rd_row;
            fst <= F_WAIT;
          end else begin
            nxt_full <= 1'b1;
            pos <= pnext;
            if (ls && lu) begin
              fst <= F_IDLE; fetch_done <= 1'b1;
            end else fst <= F_LOAD;
          end
        end
        F_WAIT: begin
          for (int c = 0; c < int'(COLS); c++) begin
            if (rem[c] && RAW'(addr[c] >> 4) == issued_row) begin
              nxt[c] <= nm_rd_data[int'(addr[c][3:0]) * BUS_W +: BUS_W];
              rem[c] <= 1'b0;
            end
          end
          fst <= F_ISSUE;
        end
        default: fst <= F_IDLE;
      endcase

      // sending side
      if (send) k <= k + 5'd1;
      if (send && k == cfg.pa - 5'd1) cur_valid <= 1'b0;
      if (move) begin
        cur       <= nxt;
        cur_valid <= 1'b1;
        nxt_full  <= 1'b0;
        k         <= '0;
      end
      if (!cur_valid && !nxt_full && !fetch_done) starved <= starved + 1;
    end
  end

  assign busy = !fetch_done || nxt_full || cur_valid || (fst != F_IDLE);
endmodule
