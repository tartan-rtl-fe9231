// tb_trt_bus_arbiter: self-checking test of the global bus arbiter.
//
// Random request patterns from N reducers and the dispatcher. Each cycle: at most
// one grant, a grant only to a requester, reducers ahead of the dispatcher, the
// dispatcher granted whenever no reducer asks, and the granted reducer is the
// first requester after the previously granted one (round robin). With all
// reducers requesting continuously, each of them must be granted once every N
// cycles.
module tb_trt_bus_arbiter;
  localparam int N = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] red_req = '0, red_gnt;
  logic disp_req = 0, disp_gnt;
  trt_bus_arbiter #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  int last = N - 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, bit ok);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    int cnt [N];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      if (i < 3000) begin
        red_req  = N'($urandom) & N'($urandom);
        disp_req = $urandom % 2;
      end else begin
        red_req = '1; disp_req = 1;
      end
      #1;
      begin
        int exp;
        exp = -1;
        for (int k = 1; k <= N; k++) if (exp < 0 && red_req[(last + k) % N]) exp = (last + k) % N;
        chk("one grant", $countones({red_gnt, disp_gnt}) <= 1);
        chk("dispatcher only when no reducer asks", disp_gnt == (disp_req && red_req == '0));
        if (exp >= 0) begin
          chk("round-robin winner", red_gnt == (N'(1) << exp));
          last = exp;
          if (i >= 3000) cnt[exp]++;
        end else chk("no reducer grant", red_gnt == '0);
      end
    end
    for (int k = 0; k < N; k++) chk("fair share", cnt[k] == 1000 / N);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
