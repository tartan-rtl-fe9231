// tb_trt_nbin: self-checking test of the NBin bit-plane FIFO.
//
// Random pushes and pops (never a push while full or a pop while empty) against a
// queue model: the head plane, empty, full and count are checked every cycle, and
// the buffer must reach full and empty at least once. First-word fall-through:
// the head is visible the cycle after the push.
module tb_trt_nbin;
  localparam int WIDTH = 256, DEPTH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push = 0, pop = 0, empty, full;
  logic [WIDTH-1:0] wr_data = '0, rd_data;
  logic [$clog2(DEPTH):0] count;
  trt_nbin #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, n_full = 0, n_empty = 0;
  logic [WIDTH-1:0] q [$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      chk("count", count, q.size());
      chk("empty", empty, q.size() == 0);
      chk("full", full, q.size() == DEPTH);
      if (q.size() > 0) begin
        checks++;
        if (rd_data !== q[0]) begin failures++; if (failures < 20) $display("FAIL head plane at %0d", i); end
      end
      if (full) n_full++;
      if (empty) n_empty++;
      // bias the traffic so both ends are reached
      push = !full && (($urandom % 100) < ((i / 500) % 2 ? 30 : 70));
      pop  = !empty && (($urandom % 100) < ((i / 500) % 2 ? 70 : 30));
      for (int w = 0; w < WIDTH / 32; w++) wr_data[w*32 +: 32] = $urandom;
      @(posedge clk);
      #1;
      if (pop) void'(q.pop_front());
      if (push) q.push_back(wr_data);
    end
    chk("reached full", n_full > 0, 1);
    chk("reached empty", n_empty > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
