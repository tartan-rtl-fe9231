// tb_trt_afu: self-checking test of the activation function unit.
//
// Random 32-bit accumulator values (small, large and extreme) with and without
// ReLU and with random right shifts; each 16-bit lane output is compared with an
// integer model of ReLU, arithmetic shift and saturation to the signed 16-bit
// range.
module tb_trt_afu;
  logic signed [31:0] in [16];
  logic relu;
  logic [4:0] shift;
  logic [255:0] out;
  trt_afu dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++) in[i] = 0;
    relu = 0; shift = 0;
    for (int trial = 0; trial < 2000; trial++) begin
      relu  = $urandom % 2;
      shift = 5'($urandom % 20);
      for (int i = 0; i < 16; i++) begin
        case ($urandom % 4)
          0: in[i] = int'($urandom % 65536) - 32768;
          1: in[i] = int'($urandom);
          2: in[i] = ($urandom % 2) ? 32'sh7fffffff : 32'sh80000000;
          default: in[i] = int'($urandom % 1024) - 512;
        endcase
      end
      #1;
      for (int i = 0; i < 16; i++) begin
        longint v;
        logic [15:0] exp;
        v = in[i];
        if (relu && v < 0) v = 0;
        v = v >>> shift;
        if (v > 32767) v = 32767;
        if (v < -32768) v = -32768;
        exp = 16'(v);
        checks++;
        if (out[i*16 +: 16] !== exp) begin
          failures++;
          if (failures < 20) $display("FAIL lane %0d in %0d relu %0d shift %0d: got %0d exp %0d",
                                      i, in[i], relu, shift, $signed(out[i*16 +: 16]), $signed(exp));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
