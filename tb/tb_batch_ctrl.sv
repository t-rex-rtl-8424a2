// tb_batch_ctrl: self-checking test of the dynamic batching configuration.
// Sweeps every input length 0..255 and checks the batch mode (65..128: one
// input, 33..64: two, 1..32: four), the core-to-input assignment, the part
// each core takes and the length error flag.
module tb_batch_ctrl;
  import trex_pkg::*;
  int checks = 0, failures = 0;
  logic [7:0] len;
  nb_e nb;
  logic [2:0] cores_per_input;
  logic [1:0] core_input [4], core_part [4];
  logic too_long;

  batch_ctrl dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cnt [3] = '{0, 0, 0};
    for (int l = 0; l < 256; l++) begin
      int n, per;
      len = 8'(l);
      #1;
      n = (l > 64) ? 1 : (l > 32) ? 2 : 4;
      per = 4 / n;
      checks++;
      if (nb !== ((n == 1) ? NB_1 : (n == 2) ? NB_2 : NB_4)) begin failures++; $display("len %0d nb %0d", l, nb); end
      checks++;
      if (cores_per_input !== 3'(per)) begin failures++; $display("len %0d cores/input %0d", l, cores_per_input); end
      for (int c = 0; c < 4; c++) begin
        checks += 2;
        if (core_input[c] !== 2'(c / per)) begin failures++; $display("len %0d core %0d input %0d", l, c, core_input[c]); end
        if (core_part[c]  !== 2'(c % per)) begin failures++; $display("len %0d core %0d part %0d", l, c, core_part[c]); end
      end
      checks++;
      if (too_long !== (l == 0 || l > 128)) begin failures++; $display("len %0d error flag", l); end
      if (l >= 1 && l <= 128) cnt[int'(nb)]++;
    end
    checks++;
    if (cnt[0] != 64 || cnt[1] != 32 || cnt[2] != 32) begin failures++; $display("mode counts %0d %0d %0d", cnt[0], cnt[1], cnt[2]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
