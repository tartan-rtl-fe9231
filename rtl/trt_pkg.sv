// trt_pkg: constants, types and address arithmetic shared by the Tartan accelerator.
//
// The geometry follows the paper's main (1 activation bit per cycle) configuration:
// a brick is 16 values contiguous along the input-channel dimension, a tile is a
// 16 x 16 grid of serial inner-product units (SIPs), weights and activations are
// 16-bit fixed point. The layer descriptor, the memory layouts and the loop order
// used by the controller and the dispatcher are this design's own choices; the
// paper leaves them open.
//
// Memory layouts (this design's choice):
//   Neuron memory (NM): one row = 16 bricks = 4096 bits, brick slot s in bits
//   [s*256 +: 256], activation j of a brick in bits [j*16 +: 16]. Activation
//   (x, y, channel brick b) of an X x Y x (16*B) array based at brick address BASE
//   sits at brick address BASE + b*X*Y + y*X + x.
//   Synapse buffer (SB): one row = 4096 bits = 16 filter lanes x 256 bits.
//   CVL: row = sb_base + g*T + t, filter lane r holds 16 weights [r*256 + j*16 +: 16].
//   FCL: row = sb_base + (g*T + t)*pw + k holds bit (pw-1-k) of the 4096 weights of
//   step t, weight j of SIP(r, c) at bit r*256 + c*16 + j (bit-plane layout).
package trt_pkg;

  localparam int unsigned BRICK   = 16;   // values per brick
  localparam int unsigned ROWS    = 16;   // SIP rows = filter lanes per tile
  localparam int unsigned COLS    = 16;   // SIP columns = window lanes per tile
  localparam int unsigned W       = 16;   // weight / activation width
  localparam int unsigned ACC_W   = 32;   // SIP accumulator (output register) width
  localparam int unsigned BUS_W   = 256;  // global interconnect width
  localparam int unsigned ROW_W   = 4096; // SB / NM row width
  localparam int unsigned PLANE_W = COLS * BRICK; // activation bit lanes per tile (256)
  localparam int unsigned BADDR_W = 16;   // NM brick address width (65536 bricks = 2 MB)

  typedef logic [BADDR_W-1:0] baddr_t;

  // Layer descriptor, programmed by the host before start.
  typedef struct packed {
    logic        is_fcl;     // 1: fully-connected layer, 0: convolutional
    logic        pool;       // max-pooling pass (CVL-style, identity weights)
    logic        act_signed; // activations are two's complement
    logic        relu;       // activation function unit applies ReLU
    logic [4:0]  pa;         // activation precision, 1..16
    logic [4:0]  pw;         // weight precision for FCLs, 1..16
    logic [4:0]  np;         // cascade slices for FCLs, 1..16 (1 = no cascade)
    logic [4:0]  prec;       // SIP output left shift
    logic [4:0]  out_shift;  // activation function unit right shift
    logic [11:0] in_x;       // input array width  (1 for FCL)
    logic [11:0] in_y;       // input array height (1 for FCL)
    logic [11:0] in_bricks;  // input channels / 16
    logic [11:0] out_x;      // output array width  (1 for FCL)
    logic [11:0] out_y;      // output array height (1 for FCL)
    logic [11:0] out_bricks; // output channels / 16 (filters/16, or outputs/16 for FCL)
    logic [4:0]  kx;         // filter width  (1 for FCL)
    logic [4:0]  ky;         // filter height (1 for FCL)
    logic [3:0]  stride;     // window stride (1 for FCL)
    baddr_t      nm_in_base; // brick address of the input array
    baddr_t      nm_out_base;// brick address of the output array
    logic [11:0] sb_base;    // first SB row of the layer
  } layer_cfg_t;

  // Position in the layer's loop nest: a work unit (g, oy, oxg) and a step inside it.
  typedef struct packed {
    logic [11:0] g;    // filter group (CVL), output group (FCL) or channel brick (pool)
    logic [11:0] oy;   // output row (CVL)
    logic [11:0] oxg;  // group of 16 output columns (CVL)
    logic [11:0] b;    // input channel brick of this step (CVL)
    logic [4:0]  kxi;  // filter column of this step (CVL)
    logic [4:0]  kyi;  // filter row of this step (CVL)
    logic [11:0] t;    // step index inside the unit
  } pos_t;

  // Work-unit label carried with each NBout entry.
  typedef struct packed {
    logic [11:0] g;
    logic [11:0] oy;
    logic [11:0] oxg;
  } unit_t;

  // Source of a SIP's i_nbout input, chosen per cycle by the tile.
  typedef enum logic [1:0] {NB_ZERO = 2'd0, NB_SELF = 2'd1, NB_BUF = 2'd2} nb_src_e;

  // Per-cycle command from the controller to every tile (lockstep).
  typedef struct packed {
    logic        sb_rd;      // read SB row sb_addr (data used next cycle)
    logic [11:0] sb_addr;
    logic        swr_shift;  // FCL: shift one weight bit into every SWR subregister
    logic        swr_first;  // first bit of a weight: sign-fill the subregister
    logic        wr_load;    // load WR
    logic        wr_conv;    // WR source: 1 = weight bus (CVL), 0 = SWR (FCL)
    logic        comp;       // bit-serial compute cycle (pops one NBin plane)
    logic        msb;        // this plane carries the activations' MSB
    logic [3:0]  bitpos;     // significance of the plane
    logic        neg;        // negate products (signed activations, MSB plane)
    nb_src_e     nb_src;     // i_nbout source
    logic        red;        // cascade reduction cycle
    logic [3:0]  red_j;      // slice position that accumulates its left neighbour
    logic        nb_wr;      // write SIP outputs into the open NBout entry
    logic        nb_max;     // SIP output is max(OR, NBout) (pooling)
    logic        nb_commit;  // close the NBout entry and hand it to the reducer
    unit_t       unit;       // label of the entry being committed
  } tile_cmd_t;

  function automatic logic [4:0] max5(input logic [4:0] a, input logic [4:0] b);
    return (a > b) ? a : b;
  endfunction

  // Number of cascade slices in a row of 16 SIPs (np >= 1).
  function automatic logic [4:0] n_slices(input layer_cfg_t cfg);
    return (cfg.np == 5'd0) ? 5'd16 : 5'(5'd16 / cfg.np);
  endfunction

  // Number of steps (weight sets) per work unit.
  function automatic logic [11:0] n_steps(input layer_cfg_t cfg);
    logic [4:0] np;
    np = (cfg.np == 0) ? 5'd1 : cfg.np;
    if (cfg.is_fcl)    return 12'((cfg.in_bricks + 12'(np) - 12'd1) / 12'(np));
    else if (cfg.pool) return 12'(int'(cfg.kx) * int'(cfg.ky));
    else               return 12'(int'(cfg.kx) * int'(cfg.ky) * int'(cfg.in_bricks));
  endfunction

  // Number of filter/output groups (values of pos.g).
  function automatic logic [11:0] n_groups(input layer_cfg_t cfg, input int unsigned n_tiles);
    int unsigned per;
    if (cfg.pool) return cfg.out_bricks;
    per = cfg.is_fcl ? n_tiles * int'(n_slices(cfg)) : n_tiles;
    return 12'((int'(cfg.out_bricks) + per - 1) / per);
  endfunction

  function automatic logic [11:0] n_xgroups(input layer_cfg_t cfg);
    return cfg.is_fcl ? 12'd1 : 12'((cfg.out_x + 12'(COLS) - 12'd1) / 12'(COLS));
  endfunction

  // Advance the loop nest by one step; last_step / last_unit flag the wrap points.
  function automatic pos_t next_pos(input layer_cfg_t cfg, input pos_t p,
                                    input int unsigned n_tiles,
                                    output logic last_step, output logic last_unit);
    pos_t q;
    q = p;
    last_step = (p.t == n_steps(cfg) - 12'd1);
    last_unit = 1'b0;
    if (!last_step) begin
      q.t = p.t + 12'd1;
      if (!cfg.is_fcl) begin
        if (!cfg.pool && p.b != cfg.in_bricks - 12'd1) q.b = p.b + 12'd1;
        else begin
          q.b = '0;
          if (p.kxi != cfg.kx - 5'd1) q.kxi = p.kxi + 5'd1;
          else begin
            q.kxi = '0;
            q.kyi = p.kyi + 5'd1;
          end
        end
      end
    end else begin
      q.t = '0; q.b = '0; q.kxi = '0; q.kyi = '0;
      if (p.oxg != n_xgroups(cfg) - 12'd1) q.oxg = p.oxg + 12'd1;
      else begin
        q.oxg = '0;
        if (!cfg.is_fcl && p.oy != cfg.out_y - 12'd1) q.oy = p.oy + 12'd1;
        else begin
          q.oy = '0;
          if (p.g != n_groups(cfg, n_tiles) - 12'd1) q.g = p.g + 12'd1;
          else begin
            q.g = '0;
            last_unit = 1'b1;
          end
        end
      end
    end
    return q;
  endfunction

  // Brick address of the activations window lane (column) c needs at position p.
  function automatic logic act_brick(input layer_cfg_t cfg, input pos_t p, input logic [3:0] c,
                                     output baddr_t addr);
    logic [11:0] ox, x, y, b;
    logic [4:0]  np, k;
    logic        ok;
    np = (cfg.np == 0) ? 5'd1 : cfg.np;
    if (cfg.is_fcl) begin
      k    = 5'(5'(c) % np);
      b    = 12'(int'(p.t) * int'(np) + int'(k));
      ok   = (5'(c) < 5'(n_slices(cfg) * np)) && (b < cfg.in_bricks);
      addr = baddr_t'(int'(cfg.nm_in_base) + int'(b));
    end else begin
      ox   = p.oxg * 12'(COLS) + 12'(c);
      x    = 12'(int'(ox) * int'(cfg.stride) + int'(p.kxi));
      y    = 12'(int'(p.oy) * int'(cfg.stride) + int'(p.kyi));
      b    = cfg.pool ? p.g : p.b;
      ok   = (ox < cfg.out_x);
      addr = baddr_t'(int'(cfg.nm_in_base) + int'(b) * int'(cfg.in_x) * int'(cfg.in_y)
                      + int'(y) * int'(cfg.in_x) + int'(x));
    end
    return ok;
  endfunction

  // NM brick address for the outputs held in column c of tile `tile` for unit u.
  function automatic logic out_brick(input layer_cfg_t cfg, input unit_t u, input logic [3:0] c,
                                     input int unsigned tile, input int unsigned n_tiles,
                                     output baddr_t addr);
    logic [11:0] ox, fb;
    logic [4:0]  np, ns;
    logic        ok;
    np = (cfg.np == 0) ? 5'd1 : cfg.np;
    ns = n_slices(cfg);
    if (cfg.is_fcl) begin
      // the finished output of a slice sits in the slice's last column
      fb   = 12'((int'(u.g) * n_tiles + tile) * int'(ns) + int'(5'(5'(c) / np)));
      ok   = (5'(c) % np == np - 5'd1) && (5'(c) < 5'(ns * np)) && (fb < cfg.out_bricks);
      addr = baddr_t'(int'(cfg.nm_out_base) + int'(fb));
    end else begin
      ox   = u.oxg * 12'(COLS) + 12'(c);
      fb   = cfg.pool ? u.g : 12'(int'(u.g) * n_tiles + tile);
      ok   = (ox < cfg.out_x) && (fb < cfg.out_bricks) && (!cfg.pool || tile == 0);
      addr = baddr_t'(int'(cfg.nm_out_base) + int'(fb) * int'(cfg.out_x) * int'(cfg.out_y)
                      + int'(u.oy) * int'(cfg.out_x) + int'(ox));
    end
    return ok;
  endfunction

endpackage
