// tb_trt_dispatcher: self-checking test of the activation dispatcher.
//
// A neuron-memory model with one cycle of read latency holds known activations.
// The dispatcher runs a convolutional layer (two window groups, the second
// partial; two output rows; two filter groups), a fully-connected layer in
// cascade mode and a pooling pass. The bus grant and the NBin-full signal are
// driven at random. Every plane sent must be the next bit-plane, MSB first, of
// the next set of 16 activation bricks in the design's loop order (filter group,
// output row, window group; then filter row, filter column, channel brick), with
// zeros in lanes that have no window; the number of planes must be exact; no
// plane may be sent while NBin is full; and `starved` must count the start-up
// cycles. The expected sets are built here from the layer geometry.
module tb_trt_dispatcher;
  import trt_pkg::*;
  localparam int NT = 2, NMR = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  layer_cfg_t cfg;
  logic start = 0, nm_rd_en, nbin_full = 0, bus_req, bus_gnt = 0, busy;
  logic [5:0] nm_rd_row;
  logic [ROW_W-1:0] nm_rd_data;
  logic [PLANE_W-1:0] plane;
  logic [31:0] starved;
  trt_dispatcher #(.N_TILES(NT), .NM_ROWS(NMR)) dut (.*);

  logic [ROW_W-1:0] nm [NMR];
  always_ff @(posedge clk) if (nm_rd_en) nm_rd_data <= nm[nm_rd_row];

  int checks = 0, failures = 0;
  logic [PLANE_W-1:0] exp_q [$];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] actv(int a, int j);
    return 16'((a * 2654435761 + j * 40503 + 12345) >> 7);
  endfunction

  // queue the pa planes of one set of lane bricks (-1 = no brick)
  task automatic push_set(int addr [16]);
    for (int k = 0; k < cfg.pa; k++) begin
      logic [PLANE_W-1:0] p;
      p = '0;
      for (int c = 0; c < 16; c++)
        if (addr[c] >= 0) for (int j = 0; j < 16; j++) p[c*16 + j] = actv(addr[c], j)[cfg.pa - 1 - k];
      exp_q.push_back(p);
    end
  endtask

  task automatic run_and_check(string name);
    int n, guard;
    n = 0; guard = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while ((busy || exp_q.size() > 0) && guard < 50000) begin
      nbin_full = ($urandom % 5 == 0);
      bus_gnt   = ($urandom % 4 != 0);
      #1;
      if (bus_req && nbin_full) begin failures++; $display("FAIL request while NBin full"); end
      if (bus_req && bus_gnt) begin
        checks++;
        if (exp_q.size() == 0) begin failures++; $display("FAIL %s: extra plane", name); end
        else begin
          if (plane !== exp_q[0]) begin
            failures++;
            if (failures < 20) $display("FAIL %s: plane %0d differs", name, n);
          end
          void'(exp_q.pop_front());
        end
        n++;
      end
      @(negedge clk);
      guard++;
    end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %s: %0d planes missing", name, exp_q.size()); end
    checks++;
    if (starved == 0) begin failures++; $display("FAIL %s: starved counter never counted", name); end
    $display("  %s: %0d planes, starved %0d", name, n, starved);
    bus_gnt = 0; nbin_full = 0;
  endtask

  initial begin
    int addr [16];
    for (int r = 0; r < NMR; r++)
      for (int s = 0; s < 16; s++) for (int j = 0; j < 16; j++) nm[r][s*256 + j*16 +: 16] = actv(r*16 + s, j);
    nm_rd_data = '0;
    cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // convolutional layer
    cfg.is_fcl = 0; cfg.pa = 4; cfg.np = 1; cfg.in_x = 20; cfg.in_y = 4; cfg.in_bricks = 2;
    cfg.kx = 3; cfg.ky = 3; cfg.stride = 1; cfg.out_x = 18; cfg.out_y = 2; cfg.out_bricks = 3;
    cfg.nm_in_base = 16'd7;
    for (int g = 0; g < 2; g++) for (int oy = 0; oy < 2; oy++) for (int oxg = 0; oxg < 2; oxg++)
      for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) for (int b = 0; b < 2; b++) begin
        for (int c = 0; c < 16; c++) begin
          int ox;
          ox = oxg * 16 + c;
          addr[c] = (ox < 18) ? 7 + b*20*4 + (oy + ky)*20 + ox + kx : -1;
        end
        push_set(addr);
      end
    run_and_check("CVL");

    // fully-connected layer, cascade np = 4, 6 input bricks (2 steps), signed 3-bit
    cfg = '0; cfg.is_fcl = 1; cfg.act_signed = 1; cfg.pa = 3; cfg.pw = 5; cfg.np = 4;
    cfg.in_x = 1; cfg.in_y = 1; cfg.in_bricks = 6; cfg.out_x = 1; cfg.out_y = 1; cfg.out_bricks = 5;
    cfg.kx = 1; cfg.ky = 1; cfg.stride = 1; cfg.nm_in_base = 16'd300;
    for (int t = 0; t < 2; t++) begin
      for (int c = 0; c < 16; c++) addr[c] = (t*4 + c%4 < 6) ? 300 + t*4 + c%4 : -1;
      push_set(addr);
    end
    run_and_check("FCL cascade");

    // pooling pass 2x2 stride 2 over 5x5, two channel bricks
    cfg = '0; cfg.pool = 1; cfg.pa = 6; cfg.np = 1; cfg.in_x = 5; cfg.in_y = 5; cfg.in_bricks = 2;
    cfg.kx = 2; cfg.ky = 2; cfg.stride = 2; cfg.out_x = 2; cfg.out_y = 2; cfg.out_bricks = 2;
    cfg.nm_in_base = 16'd500;
    for (int g = 0; g < 2; g++) for (int oy = 0; oy < 2; oy++)
      for (int ky = 0; ky < 2; ky++) for (int kx = 0; kx < 2; kx++) begin
        for (int c = 0; c < 16; c++) addr[c] = (c < 2) ? 500 + g*25 + (oy*2 + ky)*5 + c*2 + kx : -1;
        push_set(addr);
      end
    run_and_check("pool");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
