// tb_trt_tile: self-checking test of one processing tile.
//
// A single tile (N_TILES = 1) is driven by the layer controller, which is tested
// on its own elsewhere and used here only as the command source. The testbench
// fills the synapse buffer through the tile's fill port, pushes activation bit-
// planes into NBin in the loop order the dispatcher uses (transposed here), and
// grants every reducer request, recording the NM address and 16 output values of
// each brick. The bricks are compared with inner products computed here for
//   1. a convolutional layer (3x3 filters, 2 channel bricks, 18 windows, so the
//      second window group is partial), unsigned 6-bit activations, ReLU;
//   2. a fully-connected layer in cascade mode (np = 2, 8 slices), signed 4-bit
//      activations and 5-bit weights loaded bit-serially, prec = 2;
//   3. the same layer without cascade (np = 1).
// NBin is filled slowly (one plane every 3 cycles) so that NBin-empty stalls occur.
module tb_trt_tile;
  import trt_pkg::*;
  localparam int SBD = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  layer_cfg_t cfg;
  tile_cmd_t cmd;
  logic start = 0, cbusy, cdone;
  logic [31:0] stall_nbin, stall_nbout, red_cycles;
  logic nbin_push = 0, nbin_empty, nbin_full, nbout_full;
  logic [PLANE_W-1:0] nbin_data = '0;
  logic sb_wr_en = 0;
  logic [5:0] sb_wr_addr = '0;
  logic [3:0] sb_wr_slot = '0;
  logic [BUS_W-1:0] sb_wr_data = '0, red_data;
  logic red_req, red_gnt, busy;
  baddr_t red_addr;

  trt_ctrl #(.N_TILES(1)) u_ctrl (.clk, .rst_n, .cfg, .start, .nbin_empty, .nbout_full, .cmd,
                                  .busy(cbusy), .done(cdone), .stall_nbin, .stall_nbout, .red_cycles);
  trt_tile #(.TILE(0), .N_TILES(1), .SB_DEPTH(SBD)) dut (.*);
  assign red_gnt = red_req;

  int checks = 0, failures = 0;
  logic [PLANE_W-1:0] planes [$];
  logic [BUS_W-1:0] outs [int];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (red_gnt) outs[int'(red_addr)] = red_data;

  function automatic int hv(int a, int b, int c, int bits, bit sgn);
    int v;
    v = ((a * 7919 + b * 104729 + c * 1299709 + 17) * 2654435761) >>> 9;
    v = v & ((1 << bits) - 1);
    if (sgn && v >= (1 << (bits - 1))) v -= (1 << bits);
    return v;
  endfunction

  task automatic sbw(int row, int slot, logic [BUS_W-1:0] d);
    @(negedge clk);
    sb_wr_en = 1; sb_wr_addr = 6'(row); sb_wr_slot = 4'(slot); sb_wr_data = d;
    @(negedge clk);
    sb_wr_en = 0;
  endtask

  // planes for one set of lane activations a[c][j]
  task automatic add_set(int a [16][16], bit valid [16]);
    for (int k = 0; k < cfg.pa; k++) begin
      logic [PLANE_W-1:0] p;
      p = '0;
      for (int c = 0; c < 16; c++) if (valid[c]) for (int j = 0; j < 16; j++) p[c*16 + j] = a[c][j][cfg.pa - 1 - k];
      planes.push_back(p);
    end
  endtask

  task automatic run();
    outs.delete();
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (cbusy || busy || planes.size() > 0) begin
      nbin_push = 0;
      if (planes.size() > 0 && !nbin_full && ($urandom % 3 == 0)) begin
        nbin_push = 1; nbin_data = planes.pop_front();
      end
      @(negedge clk);
    end
    nbin_push = 0;
    // the last commit reaches NBout two cycles after the controller goes idle
    repeat (3) @(negedge clk);
    while (busy) @(negedge clk);
  endtask

  task automatic chk_brick(int addr, int exp [16], string what);
    checks++;
    if (!outs.exists(addr)) begin failures++; $display("FAIL %s: brick %0d not written", what, addr); return; end
    for (int r = 0; r < 16; r++) begin
      int e;
      e = exp[r];
      if (e > 32767) e = 32767;
      if (e < -32768) e = -32768;
      checks++;
      if (outs[addr][r*16 +: 16] !== 16'(e)) begin
        failures++;
        if (failures < 20) $display("FAIL %s brick %0d lane %0d: got %0d exp %0d", what, addr, r,
                                    $signed(outs[addr][r*16 +: 16]), e);
      end
    end
  endtask

  task automatic fc(int ib, int ob, int pa, int pw, int np, int id);
    int ns, T;
    int a [16][16];
    bit v [16];
    logic [BUS_W-1:0] d;
    ns = 16 / np; T = (ib + np - 1) / np;
    cfg = '0; cfg.is_fcl = 1; cfg.act_signed = 1; cfg.pa = 5'(pa); cfg.pw = 5'(pw); cfg.np = 5'(np);
    cfg.prec = 2; cfg.out_shift = 0; cfg.in_x = 1; cfg.in_y = 1; cfg.in_bricks = 12'(ib);
    cfg.out_x = 1; cfg.out_y = 1; cfg.out_bricks = 12'(ob); cfg.kx = 1; cfg.ky = 1; cfg.stride = 1;
    cfg.nm_out_base = 16'(200 + id * 20);
    for (int t = 0; t < T; t++) for (int kk = 0; kk < pw; kk++) for (int r = 0; r < 16; r++) begin
      for (int c = 0; c < 16; c++) for (int j = 0; j < 16; j++) begin
        int b, o, w;
        b = t * np + c % np; o = (c / np) * 16 + r;
        w = (b < ib && c < ns * np) ? hv(id * 1000 + o, b * 16 + j, 2, pw, 1) : 0;
        d[c*16 + j] = w[pw - 1 - kk];
      end
      sbw(t * pw + kk, r, d);
    end
    for (int t = 0; t < T; t++) begin
      for (int c = 0; c < 16; c++) begin
        int b;
        b = t * np + c % np;
        v[c] = (b < ib) && (c < ns * np);
        for (int j = 0; j < 16; j++) a[c][j] = hv(id, b * 16 + j, 1, pa, 1);
      end
      add_set(a, v);
    end
    run();
    for (int obk = 0; obk < ob; obk++) begin
      int exp [16];
      for (int r = 0; r < 16; r++) begin
        exp[r] = 0;
        for (int ch = 0; ch < ib * 16; ch++) exp[r] += hv(id * 1000 + obk * 16 + r, ch, 2, pw, 1) * hv(id, ch, 1, pa, 1);
        exp[r] = exp[r] <<< 2;
      end
      chk_brick(200 + id * 20 + obk, exp, np > 1 ? "FCL cascade" : "FCL");
    end
    checks++;
    if (np > 1 && red_cycles != np - 1) begin failures++; $display("FAIL reduction cycles %0d", red_cycles); end
  endtask

  initial begin
    int a [16][16];
    bit v [16];
    logic [BUS_W-1:0] d;
    cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // 1. CVL: 20x3 input, 2 bricks, 3x3 filters, 16 filters, 18x1 output
    cfg.is_fcl = 0; cfg.pa = 6; cfg.np = 1; cfg.relu = 1; cfg.out_shift = 0;
    cfg.in_x = 20; cfg.in_y = 3; cfg.in_bricks = 2; cfg.kx = 3; cfg.ky = 3; cfg.stride = 1;
    cfg.out_x = 18; cfg.out_y = 1; cfg.out_bricks = 1; cfg.nm_out_base = 16'd100;
    for (int t = 0; t < 18; t++) for (int r = 0; r < 16; r++) begin
      for (int j = 0; j < 16; j++) d[j*16 +: 16] = 16'(hv(r, t, j, 8, 1));
      sbw(t, r, d);
    end
    for (int oxg = 0; oxg < 2; oxg++) for (int t = 0; t < 18; t++) begin
      int b, kx, ky;
      b = t % 2; kx = (t / 2) % 3; ky = t / 6;
      for (int c = 0; c < 16; c++) begin
        v[c] = (oxg * 16 + c < 18);
        for (int j = 0; j < 16; j++) a[c][j] = hv(oxg * 16 + c + kx, ky, b * 16 + j, 6, 0);
      end
      add_set(a, v);
    end
    run();
    checks++;
    if (stall_nbin == 0) begin failures++; $display("FAIL no NBin stall"); end
    for (int ox = 0; ox < 18; ox++) begin
      int exp [16];
      for (int r = 0; r < 16; r++) begin
        exp[r] = 0;
        for (int t = 0; t < 18; t++) begin
          int b, kx, ky;
          b = t % 2; kx = (t / 2) % 3; ky = t / 6;
          for (int j = 0; j < 16; j++) exp[r] += hv(r, t, j, 8, 1) * hv(ox + kx, ky, b * 16 + j, 6, 0);
        end
        if (exp[r] < 0) exp[r] = 0;
      end
      chk_brick(100 + ox, exp, "CVL");
    end

    // 2./3. FCL
    fc(3, 8, 4, 5, 2, 1);
    fc(3, 1, 4, 5, 1, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
