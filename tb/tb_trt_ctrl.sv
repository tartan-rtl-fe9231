// tb_trt_ctrl: self-checking test of the layer controller.
//
// Runs layers with NBin never empty and NBout never full and checks the command
// stream against counts worked out here from the layer geometry:
//   * compute cycles = units x steps x pa (one activation bit per cycle), with the
//     MSB flag once per step and negation only for signed layers;
//   * FCL: serial weight shifts = units x steps x pw, and the total run time per
//     unit = pw + (T-1) x max(pa, pw) + pa + (np-1) + 3 overhead cycles; CVL:
//     1 + T x pa + 3 per unit (the paper's rates: pa cycles per CVL step,
//     max(pa, pw) per FCL step after an initial pw);
//   * cascade: np-1 reduction cycles per unit with red_j = 1..np-1;
//   * one NBout commit per unit, pool writes once per step.
// Then it holds NBin empty and NBout full for a while and checks that no compute
// cycle or unit start happens meanwhile and that the stall counters count them.
module tb_trt_ctrl;
  import trt_pkg::*;
  localparam int NT = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  layer_cfg_t cfg;
  logic start = 0, nbin_empty = 0, nbout_full = 0, busy, done;
  tile_cmd_t cmd;
  logic [31:0] stall_nbin, stall_nbout, red_cycles;
  trt_ctrl #(.N_TILES(NT)) dut (.*);

  int checks = 0, failures = 0;
  int n_comp, n_msb, n_neg, n_shift, n_commit, n_red, n_poolwr, n_cyc, n_redj_bad, n_comp_in_stall;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  always @(posedge clk) if (rst_n && busy) begin
    n_cyc++;
    if (cmd.comp) n_comp++;
    if (cmd.comp && nbin_empty) n_comp_in_stall++;
    if (cmd.msb) n_msb++;
    if (cmd.neg) n_neg++;
    if (cmd.swr_shift) n_shift++;
    if (cmd.nb_commit) n_commit++;
    if (cmd.red) begin
      n_red++;
      if (cmd.red_j == 0 || cmd.red_j >= cfg.np) n_redj_bad++;
    end
    if (cmd.nb_wr && !cmd.nb_commit) n_poolwr++;
  end

  task automatic run(output int cyc);
    n_comp = 0; n_msb = 0; n_neg = 0; n_shift = 0; n_commit = 0; n_red = 0; n_poolwr = 0; n_cyc = 0;
    n_redj_bad = 0; n_comp_in_stall = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    cyc = n_cyc;
  endtask

  function automatic int mx(int a, int b); return a > b ? a : b; endfunction

  initial begin
    int cyc;
    cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // CVL: 18 output columns (2 window groups), 2 rows, 3 filter bricks (2 groups)
    cfg.is_fcl = 0; cfg.pa = 7; cfg.np = 1; cfg.act_signed = 1;
    cfg.in_x = 20; cfg.in_y = 4; cfg.in_bricks = 2; cfg.kx = 3; cfg.ky = 3; cfg.stride = 1;
    cfg.out_x = 18; cfg.out_y = 2; cfg.out_bricks = 3;
    run(cyc);
    begin
      int units, T;
      units = 2 * 2 * 2; T = 18;
      chk("CVL compute cycles", n_comp, units * T * 7);
      chk("CVL MSB planes", n_msb, units * T);
      chk("CVL negations", n_neg, units * T);
      chk("CVL commits", n_commit, units);
      chk("CVL run cycles", cyc, units * (1 + T * 7 + 3) - 1);
    end

    // FCL, pa < pw, no cascade: 5 input bricks, 40 outputs (2 groups)
    cfg = '0; cfg.is_fcl = 1; cfg.pa = 4; cfg.pw = 9; cfg.np = 1;
    cfg.in_x = 1; cfg.in_y = 1; cfg.in_bricks = 5; cfg.out_x = 1; cfg.out_y = 1; cfg.out_bricks = 40;
    cfg.kx = 1; cfg.ky = 1; cfg.stride = 1;
    run(cyc);
    begin
      int units, T;
      units = 2; T = 5;
      chk("FCL compute cycles", n_comp, units * T * 4);
      chk("FCL weight bit shifts", n_shift, units * T * 9);
      chk("FCL negations (unsigned)", n_neg, 0);
      chk("FCL run cycles", cyc, units * (9 + (T - 1) * mx(4, 9) + 4 + 3) - 1);
    end

    // FCL, pa > pw, cascade np = 4: 7 input bricks -> 2 steps
    cfg.pa = 11; cfg.pw = 3; cfg.np = 4; cfg.in_bricks = 7; cfg.out_bricks = 8;
    run(cyc);
    begin
      int units, T;
      units = 1; T = 2;
      chk("cascade compute cycles", n_comp, units * T * 11);
      chk("cascade reduction cycles", n_red, units * 3);
      chk("cascade red_j range", n_redj_bad, 0);
      chk("cascade counter", red_cycles, units * 3);
      chk("cascade run cycles", cyc, units * (3 + (T - 1) * mx(11, 3) + 11 + 3 + 3) - 1);
    end

    // pooling: one max write per step
    cfg = '0; cfg.pool = 1; cfg.pa = 5; cfg.np = 1; cfg.in_x = 5; cfg.in_y = 5; cfg.in_bricks = 2;
    cfg.kx = 2; cfg.ky = 2; cfg.stride = 2; cfg.out_x = 2; cfg.out_y = 2; cfg.out_bricks = 2;
    run(cyc);
    chk("pool max writes", n_poolwr, 2 * 2 * 4);
    chk("pool commits", n_commit, 4);

    // stalls: NBin empty for 40 cycles in the middle, NBout full at the start
    cfg = '0; cfg.is_fcl = 1; cfg.pa = 4; cfg.pw = 4; cfg.np = 1;
    cfg.in_x = 1; cfg.in_y = 1; cfg.in_bricks = 3; cfg.out_x = 1; cfg.out_y = 1; cfg.out_bricks = 10;
    cfg.kx = 1; cfg.ky = 1; cfg.stride = 1;
    fork
      run(cyc);
      begin
        nbout_full = 1;
        repeat (25) @(negedge clk);
        nbout_full = 0;
        repeat (8) @(negedge clk);
        nbin_empty = 1;
        repeat (40) @(negedge clk);
        nbin_empty = 0;
      end
    join
    chk("no compute while NBin empty", n_comp_in_stall, 0);
    chk("NBin stall cycles", stall_nbin, 40);
    checks++;
    if (stall_nbout < 20) begin failures++; $display("FAIL NBout stall count %0d", stall_nbout); end
    chk("compute cycles after stalls", n_comp, 3 * 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
