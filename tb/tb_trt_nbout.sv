// tb_trt_nbout: self-checking test of the NBout output buffer.
//
// Random sequences of "write the 256 SIP outputs into the open entry", "commit
// the open entry with a unit label" and "pop the oldest committed entry", never
// committing while full or popping while empty. Checked against a queue model:
// the open entry seen on cur (read back for the max comparator), every column of
// the oldest committed entry and its label, empty, full and count.
module tb_trt_nbout;
  import trt_pkg::*;
  localparam int DEPTH = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr = 0, commit = 0, pop = 0, empty, full;
  logic signed [ACC_W-1:0] wr_vals [COLS][ROWS];
  logic signed [ACC_W-1:0] cur [COLS][ROWS];
  logic signed [ACC_W-1:0] rd_vals [ROWS];
  logic [3:0] rd_col = '0;
  unit_t commit_unit = '0, rd_unit;
  logic [1:0] count;
  trt_nbout #(.DEPTH(DEPTH)) dut (.*);

  typedef struct { int v [COLS][ROWS]; unit_t u; } entry_t;
  entry_t q [$];
  int open_v [COLS][ROWS];
  int checks = 0, failures = 0, n_full = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; if (failures < 20) $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    for (int c = 0; c < COLS; c++) for (int r = 0; r < ROWS; r++) wr_vals[c][r] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      chk("count", count, q.size());
      chk("empty", empty, q.size() == 0);
      chk("full", full, q.size() == DEPTH);
      if (full) n_full++;
      rd_col = 4'($urandom);
      #1;
      if (q.size() > 0) begin
        chk("label", rd_unit, q[0].u);
        for (int r = 0; r < ROWS; r++) chk("column value", rd_vals[r], q[0].v[rd_col][r]);
      end
      wr     = !full && ($urandom % 2);
      commit = wr && ($urandom % 3 == 0);   // the controller writes and commits together
      pop    = !empty && ($urandom % 3 == 0);
      if (wr) for (int c = 0; c < COLS; c++) for (int r = 0; r < ROWS; r++) wr_vals[c][r] = int'($urandom);
      commit_unit = unit_t'({$urandom, $urandom});
      @(posedge clk);
      #1;
      if (wr) for (int c = 0; c < COLS; c++) for (int r = 0; r < ROWS; r++) open_v[c][r] = wr_vals[c][r];
      if (pop) void'(q.pop_front());
      if (commit) begin
        entry_t e;
        e.v = open_v; e.u = commit_unit;
        q.push_back(e);
      end
      if (wr && !commit && !full) begin
        // the open entry is visible on cur
        chk("cur", cur[3][7], open_v[3][7]);
        chk("cur", cur[15][0], open_v[15][0]);
      end
    end
    chk("reached full", n_full > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
