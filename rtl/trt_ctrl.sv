// trt_ctrl: layer sequencer that drives every tile in lockstep.
//
// A layer is split into work units (a filter group and a group of 16 output
// windows for a convolutional layer, an output group for a fully-connected
// layer) and each unit into T steps, one weight set per step (trt_pkg::n_steps).
// The controller issues one tile_cmd_t per cycle; the tiles apply it one cycle
// later, together with the synapse-buffer row it asked for.
//
// Each unit runs as slots 0..T. In slot t the weights of step t are loaded while
// step t-1 is multiplied bit-serially (the paper's pipeline of SWR loading, copy
// into WR, and bit-serial multiplication):
//   CVL  slot 0 lasts 1 cycle; later slots last pa cycles. WR is loaded in
//        parallel from the weight bus in the last cycle of a slot.
//   FCL  slot 0 lasts pw cycles (the paper's initial dispatch overhead); later
//        slots last max(pa, pw). The SWRs shift in one weight bit per cycle (MSB
//        first) during the first pw cycles; WR copies SWR in the slot's last cycle.
//   Compute: the first pa cycles of slots 1..T, one NBin bit-plane per cycle, MSB
//        first. The first step of a unit starts from zero, later steps from OR.
//   Pool: CVL-like with one extra cycle per slot that writes max(OR, NBout) into
//        the open NBout entry (the SIP max comparator).
// Slot T lasts only as long as its computation. With FCL cascade (np > 1) the
// unit ends with np-1 reduction cycles: in cycle j the SIPs at position j of each
// slice add their left neighbour's OR (cascade multiplexer), so the slice's last
// SIP ends with the whole output. Then the SIP outputs are written to NBout and
// the entry is committed.
// Stalls: a compute cycle waits while NBin is empty; a unit waits to start while
// NBout has no free entry. stall_nbin / stall_nbout count those cycles.
// The paper describes the pipeline, the timing (pa per CVL step, max(pa,pw) per
// FCL step) and the cascade; the command encoding and the state machine are this
// design's. The reduction takes np-1 cycles here; the paper says "over the next np
// cycles", which counts the first slice position that only holds its value.
module trt_ctrl
  import trt_pkg::*;
#(
  parameter int unsigned N_TILES = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  layer_cfg_t  cfg,
  input  logic        start,
  input  logic        nbin_empty,
  input  logic        nbout_full,
  output tile_cmd_t   cmd,
  output logic        busy,
  output logic        done,        // one-cycle pulse after the last commit
  output logic [31:0] stall_nbin,
  output logic [31:0] stall_nbout,
  output logic [31:0] red_cycles
);
  typedef enum logic [2:0] {S_IDLE, S_WAIT, S_RUN, S_RED, S_WRITE, S_GAP} state_e;
  state_e      st;
  unit_t       u;
  logic [11:0] t;
  logic [4:0]  k;
  logic [3:0]  j;

  logic [11:0] T;
  logic [4:0]  L0, L, Lt, npv;
  logic        load_act, comp_act, pool_wr, stall, slot_end;
  logic [11:0] step;
  pos_t        pcur, pnext;
  logic        ls, lu;

  always_comb begin
    T   = n_steps(cfg);
    npv = (cfg.np == 0) ? 5'd1 : cfg.np;
    L0  = cfg.is_fcl ? cfg.pw : 5'd1;
    L   = cfg.is_fcl ? max5(cfg.pa, cfg.pw) : (cfg.pool ? cfg.pa + 5'd1 : cfg.pa);
    if (t == 12'd0)  Lt = L0;
    else if (t == T) Lt = cfg.pool ? cfg.pa + 5'd1 : cfg.pa;
    else             Lt = L;
    step     = t - 12'd1;
    load_act = (t < T) && (cfg.is_fcl ? (k < cfg.pw) : (k == Lt - 5'd1));
    comp_act = (t != 12'd0) && (k < cfg.pa);
    pool_wr  = cfg.pool && (t != 12'd0) && (k == cfg.pa);
    stall    = (st == S_RUN) && comp_act && nbin_empty;
    slot_end = (k == Lt - 5'd1);

    // next work unit
    pcur     = '0;
    pcur.g   = u.g;
    pcur.oy  = u.oy;
    pcur.oxg = u.oxg;
    pcur.t   = T - 12'd1;
    pnext    = next_pos(cfg, pcur, N_TILES, ls, lu);

    cmd = '0;
    cmd.unit = u;
    unique case (st)
      S_RUN: if (!stall) begin
        cmd.sb_rd     = load_act;
        cmd.sb_addr   = cfg.is_fcl
                      ? 12'(int'(cfg.sb_base) + (int'(u.g) * int'(T) + int'(t)) * int'(cfg.pw) + int'(k))
                      : 12'(int'(cfg.sb_base) + int'(u.g) * int'(T) + int'(t));
        cmd.swr_shift = cfg.is_fcl && load_act;
        cmd.swr_first = (k == 5'd0);
        cmd.wr_load   = (t < T) && slot_end;
        cmd.wr_conv   = !cfg.is_fcl;
        cmd.comp      = comp_act;
        cmd.msb       = comp_act && (k == 5'd0);
        cmd.bitpos    = 4'(cfg.pa - 5'd1 - k);
        cmd.neg       = comp_act && (k == 5'd0) && cfg.act_signed;
        cmd.nb_src    = pool_wr ? NB_BUF : ((step == 12'd0 || cfg.pool) ? NB_ZERO : NB_SELF);
        cmd.nb_wr     = pool_wr;
        cmd.nb_max    = pool_wr && (step != 12'd0);
      end
      S_RED: begin
        cmd.red   = 1'b1;
        cmd.red_j = j;
      end
      S_WRITE: begin
        cmd.nb_wr     = !cfg.pool;
        cmd.nb_commit = 1'b1;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; u <= '0; t <= '0; k <= '0; j <= '0;
      done <= 1'b0; stall_nbin <= '0; stall_nbout <= '0; red_cycles <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          u <= '0; st <= S_WAIT;
          stall_nbin <= '0; stall_nbout <= '0; red_cycles <= '0;
        end
        S_WAIT: begin
          if (nbout_full) stall_nbout <= stall_nbout + 1;
          else begin
            st <= S_RUN; t <= '0; k <= '0;
          end
        end
        S_RUN: begin
          if (stall) stall_nbin <= stall_nbin + 1;
          else if (slot_end) begin
            k <= '0;
            if (t == T) begin
              if (cfg.is_fcl && npv > 5'd1) begin
                st <= S_RED; j <= 4'd1;
              end else st <= S_WRITE;
            end else t <= t + 12'd1;
          end else k <= k + 5'd1;
        end
        S_RED: begin
          red_cycles <= red_cycles + 1;
          if (5'(j) == npv - 5'd1) st <= S_WRITE;
          else j <= j + 4'd1;
        end
        S_WRITE: begin
          u.g <= pnext.g; u.oy <= pnext.oy; u.oxg <= pnext.oxg;
          if (lu) begin
            st <= S_IDLE; done <= 1'b1;
          end else st <= S_GAP;
        end
        S_GAP: st <= S_WAIT;
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy = (st != S_IDLE);

  a_prec: assert property (@(posedge clk) disable iff (!rst_n)
                           (st == S_IDLE && start) |-> (cfg.pa >= 5'd1 && cfg.pa <= 5'd16));
endmodule
