// tb_trt_chip: end-to-end test of the Tartan accelerator at reduced size.
//
// Runs five layers through the whole chip (2 tiles, small memories) and compares
// every output brick in the neuron memory with a reference computed here from the
// same hash-generated activations and weights:
//   1. convolutional layer, stride 1, unsigned 5-bit activations, ReLU, two groups
//      of output windows and a partly empty filter group;
//   2. convolutional layer, stride 2, signed 3-bit activations (MSB negation);
//   3. fully-connected layer, pa = 6, pw = 7 (bit-serial weight loading);
//   4. fully-connected layer in cascade mode, np = 4, signed activations;
//   5. max-pooling pass (2x2, stride 2) using the SIP comparators;
//   6. fully-connected layer with one input brick and 256 output bricks, so that the
//      reducers cannot drain NBout as fast as units finish (NBout-full stalls).
// It also checks that the mechanisms the design has occurred: NBin-empty stalls,
// NBout-full stalls, dispatcher starvation, cascade reduction cycles and reducer
// bus writes, and checks the FCL step time against max(pa, pw) per step.
module tb_trt_chip;
  import trt_pkg::*;

  localparam int NT = 2, SBD = 64, NMR = 64;
  localparam int SAW = $clog2(SBD), RAW = $clog2(NMR), TW = $clog2(NT);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  layer_cfg_t cfg;
  logic start = 0, busy, done;
  logic host_nm_wr = 0, host_rd_en = 0, host_sb_wr = 0;
  logic [RAW-1:0] host_nm_row = '0, host_rd_row = '0;
  logic [3:0] host_nm_slot = '0, host_sb_slot = '0;
  logic [BUS_W-1:0] host_nm_data = '0, host_sb_data = '0;
  logic [ROW_W-1:0] host_rd_data;
  logic [TW-1:0] host_sb_tile = '0;
  logic [SAW-1:0] host_sb_row = '0;
  logic [31:0] stall_nbin, stall_nbout, disp_starved, red_cycles, bus_red_writes, cycles;

  trt_chip #(.N_TILES(NT), .SB_DEPTH(SBD), .NM_ROWS(NMR)) dut (.*);

  int checks = 0, failures = 0;
  int n_nbin_stall = 0, n_nbout_stall = 0, n_starved = 0, n_red = 0, n_wr = 0;
  int n_cvl = 0, n_fcl = 0, n_casc = 0, n_pool = 0, n_signed = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- deterministic data ----------------
  function automatic int hsh(int a, int b, int c, int d, int e);
    int unsigned h;
    h = 32'h9E3779B9 ^ (a * 32'h85EBCA6B) ^ (b * 32'hC2B2AE35) ^ (c * 32'h27D4EB2F) ^ (d * 32'h165667B1) ^ (e * 32'hD3A2646C);
    h = h ^ (h >> 15); h = h * 32'h2C1B3C6D; h = h ^ (h >> 12);
    return int'(h);
  endfunction
  // value of `bits` bits, signed or unsigned
  function automatic int val(int h, int bits, bit sgn);
    int v;
    v = h & ((1 << bits) - 1);
    if (sgn && v >= (1 << (bits - 1))) v -= (1 << bits);
    return v;
  endfunction

  int lid;
  function automatic int act(int x, int y, int ch, int pa, bit sgn);
    return val(hsh(lid, 1, x, y, ch), pa, sgn);
  endfunction
  function automatic int wgt(int f, int ky, int kx, int ch, int bits);
    return val(hsh(lid, 2, f * 64 + ky, kx, ch), bits, 1'b1);
  endfunction

  function automatic logic [15:0] afu(longint acc, layer_cfg_t c);
    int v;
    v = int'(acc);                // wraps to 32 bits like the accumulator
    v = v <<< c.prec;
    if (c.relu && v < 0) v = 0;
    v = v >>> c.out_shift;
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    return v[15:0];
  endfunction

  // ---------------- host access ----------------
  task automatic nm_write(int baddr, logic [BUS_W-1:0] d);
    @(negedge clk);
    host_nm_wr = 1; host_nm_row = RAW'(baddr >> 4); host_nm_slot = 4'(baddr & 15); host_nm_data = d;
    @(negedge clk);
    host_nm_wr = 0;
  endtask
  task automatic sb_write(int tile, int row, int slot, logic [BUS_W-1:0] d);
    @(negedge clk);
    host_sb_wr = 1; host_sb_tile = TW'(tile); host_sb_row = SAW'(row); host_sb_slot = 4'(slot); host_sb_data = d;
    @(negedge clk);
    host_sb_wr = 0;
  endtask
  task automatic nm_read_brick(int baddr, output logic [BUS_W-1:0] d);
    @(negedge clk);
    host_rd_en = 1; host_rd_row = RAW'(baddr >> 4);
    @(negedge clk);
    host_rd_en = 0;
    d = host_rd_data[(baddr & 15) * BUS_W +: BUS_W];
  endtask

  task automatic run(int expect_max_cycles);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    if (stall_nbin > 0) n_nbin_stall++;
    if (stall_nbout > 0) n_nbout_stall++;
    if (disp_starved > 0) n_starved++;
    if (red_cycles > 0) n_red++;
    n_wr += bus_red_writes;
    $display("  layer %0d: %0d cycles, nbin stalls %0d, nbout stalls %0d, starved %0d, red %0d, writes %0d",
             lid, cycles, stall_nbin, stall_nbout, disp_starved, red_cycles, bus_red_writes);
    if (expect_max_cycles > 0) begin
      checks++;
      if (cycles > expect_max_cycles) begin
        failures++;
        $display("FAIL layer %0d took %0d cycles, bound %0d", lid, cycles, expect_max_cycles);
      end
    end
  endtask

  task automatic check_brick(int baddr, logic [15:0] exp [16]);
    logic [BUS_W-1:0] d;
    nm_read_brick(baddr, d);
    for (int j = 0; j < 16; j++) begin
      checks++;
      if (d[j*16 +: 16] !== exp[j]) begin
        failures++;
        if (failures < 20) $display("FAIL layer %0d brick %0d lane %0d: got %0d exp %0d", lid, baddr, j,
                                    $signed(d[j*16 +: 16]), $signed(exp[j]));
      end
    end
  endtask

  // ---------------- convolutional / pooling layer ----------------
  task automatic conv_layer(int id, int ix, int iy, int ib, int k, int s, int ob, int pa, bit sgn,
                            bit relu, bit pool, int in_base, int out_base);
    int ox_n, oy_n, T, NG;
    logic [BUS_W-1:0] d;
    logic [15:0] exp [16];
    lid = id;
    ox_n = (ix - k) / s + 1;
    oy_n = (iy - k) / s + 1;
    cfg = '0;
    cfg.is_fcl = 0; cfg.pool = pool; cfg.act_signed = sgn; cfg.relu = relu;
    cfg.pa = 5'(pa); cfg.pw = 5'd16; cfg.np = 5'd1; cfg.prec = 0; cfg.out_shift = pool ? 0 : 2;
    cfg.in_x = 12'(ix); cfg.in_y = 12'(iy); cfg.in_bricks = 12'(ib);
    cfg.out_x = 12'(ox_n); cfg.out_y = 12'(oy_n); cfg.out_bricks = 12'(ob);
    cfg.kx = 5'(k); cfg.ky = 5'(k); cfg.stride = 4'(s);
    cfg.nm_in_base = baddr_t'(in_base); cfg.nm_out_base = baddr_t'(out_base); cfg.sb_base = 0;
    T  = pool ? k * k : k * k * ib;
    NG = pool ? ob : (ob + NT - 1) / NT;
    // activations
    for (int b = 0; b < ib; b++) for (int y = 0; y < iy; y++) for (int x = 0; x < ix; x++) begin
      for (int j = 0; j < 16; j++) d[j*16 +: 16] = 16'(act(x, y, b*16 + j, pa, sgn));
      nm_write(in_base + b*ix*iy + y*ix + x, d);
    end
    // weights: row g*T + t, t = (kyi*k + kxi)*ib + b
    for (int tl = 0; tl < NT; tl++) for (int g = 0; g < NG; g++) for (int t = 0; t < T; t++)
      for (int r = 0; r < 16; r++) begin
        int b, kxi, kyi, f;
        b = pool ? g : t % ib; kxi = pool ? t % k : (t / ib) % k; kyi = pool ? t / k : t / (ib * k);
        f = (g * NT + tl) * 16 + r;
        for (int j = 0; j < 16; j++)
          d[j*16 +: 16] = pool ? ((j == r) ? 16'd1 : 16'd0) : 16'(wgt(f, kyi, kxi, b*16 + j, 16));
        sb_write(tl, g * T + t, r, d);
      end
    run(0);
    if (pool) n_pool++; else n_cvl++;
    if (sgn) n_signed++;
    // check
    for (int fb = 0; fb < ob; fb++) for (int oy = 0; oy < oy_n; oy++) for (int ox = 0; ox < ox_n; ox++) begin
      for (int r = 0; r < 16; r++) begin
        longint acc;
        int f;
        f = fb * 16 + r;
        if (pool) begin
          acc = -(longint'(1) << 40);
          for (int ky = 0; ky < k; ky++) for (int kx = 0; kx < k; kx++)
            if (act(ox*s + kx, oy*s + ky, f, pa, sgn) > acc) acc = act(ox*s + kx, oy*s + ky, f, pa, sgn);
        end else begin
          acc = 0;
          for (int ky = 0; ky < k; ky++) for (int kx = 0; kx < k; kx++) for (int ch = 0; ch < ib*16; ch++)
            acc += longint'(wgt(f, ky, kx, ch, 16)) * act(ox*s + kx, oy*s + ky, ch, pa, sgn);
        end
        exp[r] = afu(acc, cfg);
      end
      check_brick(out_base + fb*ox_n*oy_n + oy*ox_n + ox, exp);
    end
  endtask

  // ---------------- fully-connected layer ----------------
  task automatic fc_layer(int id, int ib, int ob, int pa, int pw, int np, bit sgn, int in_base, int out_base);
    int ns, T, NG;
    logic [BUS_W-1:0] d;
    logic [15:0] exp [16];
    lid = id;
    ns = 16 / np;
    T  = (ib + np - 1) / np;
    NG = (ob + NT*ns - 1) / (NT*ns);
    cfg = '0;
    cfg.is_fcl = 1; cfg.act_signed = sgn; cfg.relu = 0;
    cfg.pa = 5'(pa); cfg.pw = 5'(pw); cfg.np = 5'(np); cfg.prec = 1; cfg.out_shift = 3;
    cfg.in_x = 1; cfg.in_y = 1; cfg.in_bricks = 12'(ib);
    cfg.out_x = 1; cfg.out_y = 1; cfg.out_bricks = 12'(ob);
    cfg.kx = 1; cfg.ky = 1; cfg.stride = 1;
    cfg.nm_in_base = baddr_t'(in_base); cfg.nm_out_base = baddr_t'(out_base); cfg.sb_base = 0;
    for (int b = 0; b < ib; b++) begin
      for (int j = 0; j < 16; j++) d[j*16 +: 16] = 16'(act(0, 0, b*16 + j, pa, sgn));
      nm_write(in_base + b, d);
    end
    // bit-plane weights: row (g*T + t)*pw + kk holds bit pw-1-kk
    for (int tl = 0; tl < NT; tl++) for (int g = 0; g < NG; g++) for (int t = 0; t < T; t++)
      for (int kk = 0; kk < pw; kk++) for (int r = 0; r < 16; r++) begin
        for (int c = 0; c < 16; c++) begin
          int s, kpos, o, b;
          s = c / np; kpos = c % np;
          o = ((g * NT + tl) * ns + s) * 16 + r;
          b = t * np + kpos;
          for (int j = 0; j < 16; j++) begin
            int w;
            w = (b < ib && c < ns * np) ? wgt(o, 0, 0, b*16 + j, pw) : 0;
            d[c*16 + j] = w[pw - 1 - kk];
          end
        end
        sb_write(tl, (g * T + t) * pw + kk, r, d);
      end
    // step time: first pw cycles, then T steps of max(pa,pw); allow pipeline and write-out slack
    run(NG * (pw + T * ((pa > pw) ? pa : pw) + np + 40) + 200);
    n_fcl++;
    if (np > 1) n_casc++;
    if (sgn) n_signed++;
    for (int obk = 0; obk < ob; obk++) begin
      for (int r = 0; r < 16; r++) begin
        longint acc;
        int o;
        o = obk * 16 + r;
        acc = 0;
        for (int ch = 0; ch < ib*16; ch++) acc += longint'(wgt(o, 0, 0, ch, pw)) * act(0, 0, ch, pa, sgn);
        exp[r] = afu(acc, cfg);
      end
      check_brick(out_base + obk, exp);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    conv_layer(1, 20, 3, 2, 3, 1, 3, 5, 1'b0, 1'b1, 1'b0, 0, 128);
    conv_layer(2, 9, 5, 1, 3, 2, 2, 3, 1'b1, 1'b0, 1'b0, 256, 320);
    fc_layer(3, 4, 3, 6, 7, 1, 1'b0, 400, 416);
    fc_layer(4, 6, 5, 5, 4, 4, 1'b1, 432, 448);
    conv_layer(5, 5, 5, 1, 2, 2, 1, 6, 1'b0, 1'b0, 1'b1, 480, 512);
    // short steps and many output bricks: reducers fall behind and NBout fills
    fc_layer(6, 1, 256, 2, 2, 1, 1'b1, 560, 576);
    // every mechanism must have happened at least once
    checks++; if (n_cvl == 0)         begin failures++; $display("FAIL no CVL run"); end
    checks++; if (n_fcl == 0)         begin failures++; $display("FAIL no FCL run"); end
    checks++; if (n_casc == 0)        begin failures++; $display("FAIL no cascade run"); end
    checks++; if (n_pool == 0)        begin failures++; $display("FAIL no pooling run"); end
    checks++; if (n_signed == 0)      begin failures++; $display("FAIL no signed run"); end
    checks++; if (n_nbin_stall == 0)  begin failures++; $display("FAIL no NBin stall"); end
    checks++; if (n_nbout_stall == 0) begin failures++; $display("FAIL no NBout stall"); end
    checks++; if (n_starved == 0)     begin failures++; $display("FAIL no dispatcher starvation"); end
    checks++; if (n_red == 0)         begin failures++; $display("FAIL no cascade reduction"); end
    checks++; if (n_wr == 0)          begin failures++; $display("FAIL no reducer writes"); end
    $display("mechanisms: cvl=%0d fcl=%0d cascade=%0d pool=%0d signed=%0d nbin_stall=%0d nbout_stall=%0d starved=%0d red=%0d writes=%0d",
             n_cvl, n_fcl, n_casc, n_pool, n_signed, n_nbin_stall, n_nbout_stall, n_starved, n_red, n_wr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
