// tb_trt_reducer: self-checking test of a tile's reducer.
//
// The NBout side is modelled here: one committed unit at a time. The reducer must
// walk the 16 columns of the oldest entry, request the bus for every column that
// holds a real output brick and skip the others, drive the brick's NM address,
// advance only on a grant and pop the entry after column 15. The expected address
// list of each unit is worked out here for a convolutional layer (partial last
// window group, filter groups past the last filter), a fully-connected layer in
// cascade mode (only the last column of each slice is an output) and a pooling
// pass (only tile 0 writes). Grants arrive at random.
module tb_trt_reducer;
  import trt_pkg::*;
  localparam int TILE = 1, NT = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  layer_cfg_t cfg;
  logic nb_empty, nb_pop, bus_req, bus_gnt = 0, busy;
  unit_t nb_unit;
  logic [3:0] rd_col;
  baddr_t bus_addr;
  trt_reducer #(.TILE(TILE), .N_TILES(NT)) dut (.*);

  logic  have = 0;
  unit_t cur_u = '0;
  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  assign nb_empty = !have;
  assign nb_unit  = cur_u;

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; if (failures < 30) $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  // expected NM addresses for one unit
  function automatic void expect_list(unit_t u, ref int lst [$]);
    int np, ns;
    lst.delete();
    np = (cfg.np == 0) ? 1 : cfg.np;
    ns = 16 / np;
    for (int c = 0; c < 16; c++) begin
      if (cfg.is_fcl) begin
        int ob;
        ob = (u.g * NT + TILE) * ns + c / np;
        if (c % np == np - 1 && c < ns * np && ob < cfg.out_bricks) lst.push_back(cfg.nm_out_base + ob);
      end else begin
        int ox, fb;
        ox = u.oxg * 16 + c;
        fb = cfg.pool ? u.g : u.g * NT + TILE;
        if (ox < cfg.out_x && fb < cfg.out_bricks && !cfg.pool)
          lst.push_back(cfg.nm_out_base + fb * cfg.out_x * cfg.out_y + u.oy * cfg.out_x + ox);
      end
    end
  endfunction

  task automatic run_units(int nunits);
    for (int n = 0; n < nunits; n++) begin
      unit_t u;
      int lst [$];
      int got, waited;
      bit nb_pop_q;
      u = '0;
      u.g = 12'($urandom % 3); u.oy = 12'($urandom % cfg.out_y); u.oxg = 12'($urandom % 2);
      expect_list(u, lst);
      @(negedge clk);
      cur_u = u; have = 1;
      got = 0; waited = 0;
      while (have && waited < 200) begin
        bus_gnt = bus_req && ($urandom % 3 != 0);
        #1;
        nb_pop_q = nb_pop;
        if (bus_gnt) begin
          if (got < lst.size()) chk("address", bus_addr, lst[got]);
          else begin failures++; $display("FAIL extra write"); end
          got++;
        end
        @(posedge clk);
        #1;
        if (nb_pop_q) have = 0;
        @(negedge clk);
        bus_gnt = 0;
        waited++;
      end
      chk("bricks written per unit", got, lst.size());
      chk("entry popped", have, 0);
    end
  endtask

  initial begin
    cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // convolutional: 20 output columns (second window group partial), 8 filter bricks
    cfg.is_fcl = 0; cfg.np = 1; cfg.out_x = 20; cfg.out_y = 3; cfg.out_bricks = 8; cfg.nm_out_base = 100;
    run_units(30);
    // fully-connected, cascade np = 4 (4 slices): 30 output bricks
    cfg = '0; cfg.is_fcl = 1; cfg.np = 4; cfg.out_x = 1; cfg.out_y = 1; cfg.out_bricks = 30; cfg.nm_out_base = 900;
    run_units(20);
    // fully-connected, np = 3 (5 slices, column 15 unused)
    cfg.np = 3;
    run_units(20);
    // pooling: tile 1 writes nothing
    cfg = '0; cfg.pool = 1; cfg.np = 1; cfg.out_x = 10; cfg.out_y = 2; cfg.out_bricks = 4; cfg.nm_out_base = 50;
    run_units(10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
