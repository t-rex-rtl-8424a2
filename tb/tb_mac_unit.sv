// tb_mac_unit: self-checking test of the digit-serial MAC unit.
// Drives the digit pairs of random signed operands in 4b, 8b and 16b
// precision (1, 4, 16 cycles per product), accumulates several products per
// sum and compares with the products computed directly. Also checks the
// cycle count of one 16b MAC and the clear behaviour.
module tb_mac_unit;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic en = 0, clr = 0, sgn1 = 0, sgn2 = 0;
  logic [3:0] in1 = 0, in2 = 0;
  logic [2:0] shift = 0;
  logic [31:0] psum;

  mac_unit dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sext(logic [15:0] v, int w);
    int r;
    r = int'(v) & ((1 << w) - 1);
    if (r >= (1 << (w - 1))) r -= (1 << w);
    return r;
  endfunction

  task automatic mac(input int d, input logic [15:0] a, input logic [15:0] b, input logic first, output int cyc);
    cyc = 0;
    for (int i = 0; i < d; i++)
      for (int j = 0; j < d; j++) begin
        @(negedge clk);
        en = 1; clr = first && i == 0 && j == 0;
        in1 = 4'(a >> (4*i)); in2 = 4'(b >> (4*j));
        sgn1 = (i == d-1); sgn2 = (j == d-1); shift = 3'(i + j);
        cyc++;
      end
    @(negedge clk);
    en = 0; clr = 0;
  endtask

  initial begin
    int d, cyc, w;
    logic signed [31:0] ref_sum;
    logic [15:0] a, b;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int p = 0; p < 3; p++) begin
      d = (p == 0) ? 1 : (p == 1) ? 2 : 4;
      w = 4 * d;
      for (int t = 0; t < 30; t++) begin
        ref_sum = 0;
        for (int s = 0; s < 5; s++) begin
          a = 16'($urandom); b = 16'($urandom);
          if (t == 0) begin a = 16'hffff; b = 16'h8000; end
          // sign-extend the w-bit operands
          ref_sum += sext(a, w) * sext(b, w);
          mac(d, a, b, s == 0, cyc);
          if (cyc != d*d) begin failures++; $display("cycle count %0d for %0d-digit MAC", cyc, d); end
          checks++;
        end
        checks++;
        if ($signed(psum) !== ref_sum) begin
          failures++;
          $display("prec %0d: psum %0d expected %0d", w, $signed(psum), ref_sum);
        end
      end
    end
    // clear without enable
    clr = 1; @(negedge clk); clr = 0;
    checks++; if (psum !== 0) begin failures++; $display("clear failed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
