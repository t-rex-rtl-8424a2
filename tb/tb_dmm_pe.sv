// tb_dmm_pe: self-checking test of the DMM processing element.
// Feeds random 4-element column slices of X and row slices of W_S, walks the
// digit pairs of each precision and accumulates three outer products, then
// compares all 16 partial sums with directly computed dot products.
module tb_dmm_pe;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic en = 0, clr = 0, sgn_i = 0, sgn_j = 0;
  logic [15:0] a [4], b [4];
  logic [1:0] di = 0, dj = 0;
  logic [2:0] shift = 0;
  logic [31:0] psum [4][4];

  dmm_pe dut (.*);

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

  initial begin
    int d, w;
    int expv [4][4];
    logic [15:0] av [4], bv [4];
    for (int i = 0; i < 4; i++) begin a[i] = 0; b[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < 3; p++) begin
      d = (p == 0) ? 1 : (p == 1) ? 2 : 4;
      w = 4 * d;
      for (int t = 0; t < 10; t++) begin
        for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) expv[r][c] = 0;
        for (int k = 0; k < 3; k++) begin
          for (int i = 0; i < 4; i++) begin av[i] = 16'($urandom); bv[i] = 16'($urandom); end
          for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) expv[r][c] += sext(av[r], w) * sext(bv[c], w);
          for (int i = 0; i < d; i++)
            for (int j = 0; j < d; j++) begin
              @(negedge clk);
              a = av; b = bv;
              en = 1; clr = (k == 0 && i == 0 && j == 0);
              di = 2'(i); dj = 2'(j); sgn_i = (i == d-1); sgn_j = (j == d-1); shift = 3'(i + j);
            end
        end
        @(negedge clk);
        en = 0; clr = 0;
        for (int r = 0; r < 4; r++)
          for (int c = 0; c < 4; c++) begin
            checks++;
            if ($signed(psum[r][c]) != expv[r][c]) begin
              failures++;
              $display("w=%0d psum[%0d][%0d]=%0d expected %0d", w, r, c, $signed(psum[r][c]), expv[r][c]);
            end
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
