// tb_uniform_dequant: self-checking test of the W_D value dequantizer.
// For random layer scales (M-m) and offsets m it applies all 64 codes and
// compares with value = floor(code*scale/32) + sign(code)*m, saturated to
// 16b, computed in the testbench with integer arithmetic.
module tb_uniform_dequant;
  int checks = 0, failures = 0;
  logic [5:0]  code;
  logic [15:0] scale, offset, value;

  uniform_dequant dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 40; t++) begin
      scale  = (t == 0) ? 16'hffff : 16'($urandom);
      offset = (t == 0) ? 16'hffff : 16'($urandom_range(0, 4000));
      for (int cv = -32; cv < 32; cv++) begin
        longint e;
        code = 6'(cv);
        #1;
        e = longint'(cv) * longint'(scale);
        e = (e >= 0) ? e / 32 : -((-e + 31) / 32);   // floor division
        if (cv > 0) e += offset; else if (cv < 0) e -= offset; else e = 0;
        if (e > 32767) e = 32767;
        if (e < -32768) e = -32768;
        checks++;
        if (value !== 16'(e)) begin
          failures++;
          $display("code %0d scale %0d m %0d: %0d expected %0d", cv, scale, offset, $signed(value), e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
