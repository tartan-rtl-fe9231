// tb_trt_sb: self-checking test of the synapse buffer.
//
// Fills every row slot by slot with random data, then reads rows at random and
// checks the whole 4096-bit row one cycle after rd_en (one-cycle latency), that
// the read register holds while rd_en is low, and that a slot write changes only
// its own 256 bits.
module tb_trt_sb;
  localparam int DEPTH = 32, RW = 4096, SW = 256;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rd_en = 0, wr_en = 0;
  logic [4:0] rd_addr = '0, wr_addr = '0;
  logic [3:0] wr_slot = '0;
  logic [RW-1:0] rd_data;
  logic [SW-1:0] wr_data = '0;
  trt_sb #(.DEPTH(DEPTH), .RW(RW), .SW(SW)) dut (.*);

  int checks = 0, failures = 0;
  logic [RW-1:0] model [DEPTH];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int row, int slot);
    @(negedge clk);
    wr_en = 1; wr_addr = 5'(row); wr_slot = 4'(slot);
    for (int w = 0; w < SW / 32; w++) wr_data[w*32 +: 32] = $urandom;
    model[row][slot*SW +: SW] = wr_data;
    @(negedge clk);
    wr_en = 0;
  endtask

  initial begin
    for (int r = 0; r < DEPTH; r++) for (int s = 0; s < RW / SW; s++) wr(r, s);
    for (int i = 0; i < 400; i++) begin
      int r;
      r = $urandom % DEPTH;
      if ($urandom % 4 == 0) wr($urandom % DEPTH, $urandom % 16);
      @(negedge clk);
      rd_en = 1; rd_addr = 5'(r);
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (rd_data !== model[r]) begin failures++; if (failures < 20) $display("FAIL row %0d", r); end
      @(negedge clk);
      checks++;
      if (rd_data !== model[r]) begin failures++; if (failures < 20) $display("FAIL hold row %0d", r); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
