// tb_trt_sip: self-checking test of one serial inner-product unit.
//
// Random trials of:
//   * convolutional mode: 16 weights loaded in parallel into WR, then pa cycles of
//     activation bits MSB first; OR must equal the 16-term inner product after
//     exactly pa accumulate cycles (one activation bit per cycle);
//   * fully-connected mode: pw cycles of serial weight bits into SWR with the copy
//     into WR in the last of them, then the same bit-serial product with pw-bit
//     signed weights;
//   * signed activations: the MSB plane is negated;
//   * continuing from a partial sum given on nbout_in (msb cycle);
//   * the cascade input replacing adder-tree input 0;
//   * the max comparator and the output shift by prec.
// Expected values are computed here with plain integer arithmetic.
module tb_trt_sip;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [15:0]             swr_bits = '0;
  logic                    swr_shift = 0, swr_first = 0, wr_load = 0, wr_conv = 0;
  logic [15:0][15:0]       w_bus = '0;
  logic [15:0]             act_bits = '0;
  logic                    acc_en = 0, msb = 0, neg = 0, casc_sel = 0, pool_sel = 0;
  logic [3:0]              bitpos = '0;
  logic signed [31:0]      casc_in = '0, nbout_in = '0, or_q, out;
  logic [4:0]              prec = '0;

  trt_sip dut (.*);

  int checks = 0, failures = 0;
  int w [16];
  int a [16];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sx(int v, int bits);
    v = v & ((1 << bits) - 1);
    if (v >= (1 << (bits - 1))) v -= (1 << bits);
    return v;
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  // bit-serial multiply of the loaded weights with a[], starting from `base`
  task automatic serial(int pa, bit sgn, int base);
    int ncyc;
    ncyc = 0;
    for (int k = 0; k < pa; k++) begin
      @(negedge clk);
      acc_en = 1; msb = (k == 0); neg = sgn && (k == 0); bitpos = 4'(pa - 1 - k);
      nbout_in = base;
      for (int j = 0; j < 16; j++) act_bits[j] = a[j][pa - 1 - k];
      ncyc++;
    end
    @(negedge clk);
    acc_en = 0; msb = 0; neg = 0; act_bits = '0; nbout_in = '0;
    check("cycles per product", ncyc, pa);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 300; trial++) begin
      int pa, pw, exp;
      bit sgn, fcl;
      pa  = 1 + ($urandom % 16);
      sgn = $urandom % 2;
      fcl = $urandom % 2;
      pw  = 2 + ($urandom % 15);
      for (int j = 0; j < 16; j++) begin
        a[j] = sgn ? sx($urandom, pa) : int'($urandom & ((1 << pa) - 1));
        w[j] = fcl ? sx($urandom, pw) : sx($urandom, 16);
      end
      if (!fcl) begin
        @(negedge clk);
        for (int j = 0; j < 16; j++) w_bus[j] = 16'(w[j]);
        wr_load = 1; wr_conv = 1;
        @(negedge clk);
        wr_load = 0; w_bus = '0;
      end else begin
        // pw cycles, MSB first, copy into WR in the last one
        for (int kk = 0; kk < pw; kk++) begin
          @(negedge clk);
          swr_shift = 1; swr_first = (kk == 0);
          for (int j = 0; j < 16; j++) swr_bits[j] = w[j][pw - 1 - kk];
          wr_load = (kk == pw - 1); wr_conv = 0;
        end
        @(negedge clk);
        swr_shift = 0; swr_first = 0; wr_load = 0; swr_bits = '0;
      end
      exp = 0;
      for (int j = 0; j < 16; j++) exp += w[j] * a[j];
      serial(pa, sgn, 0);
      check(fcl ? "FCL product" : "CVL product", or_q, exp);
      // continue from a partial sum given on nbout_in
      begin
        int base;
        base = int'($urandom % 100000) - 50000;
        serial(pa, sgn, base);
        check("partial-sum continuation", or_q, base + exp);
        exp = base + exp;
      end
      // cascade: add a neighbour's value through input 0
      begin
        int cv;
        cv = int'($urandom % 100000) - 50000;
        @(negedge clk);
        acc_en = 1; casc_sel = 1; casc_in = cv; bitpos = 0; act_bits = '1; neg = 0;
        @(negedge clk);
        acc_en = 0; casc_sel = 0; act_bits = '0;
        // terms 1..15 still add their weights (all activation bits set)
        for (int j = 1; j < 16; j++) cv += w[j];
        check("cascade add", or_q, exp + cv);
        exp = exp + cv;
      end
      // max comparator and shifter
      begin
        int other, p;
        other = int'($urandom % 100000) - 50000;
        p = $urandom % 4;
        nbout_in = other; pool_sel = 1; prec = 5'(p);
        #1;
        check("max + shift", out, ((other > exp) ? other : exp) <<< p);
        pool_sel = 0;
        #1;
        check("no-max shift", out, exp <<< p);
        prec = 0; nbout_in = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
