// tb_rel_addr_gen: self-checking test of the relative addressing of W_D.
// Builds random sorted row-index lists per column (as a fixed-non-zero
// column of W_D would have), delta-encodes them with gaps below 32, feeds
// the deltas and checks that the produced addresses are the original
// indices, including the example of the paper's figure (5 12 18 26 32).
module tb_rel_addr_gen;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic reset_col = 0, step = 0;
  logic [4:0] delta = 0;
  logic [7:0] addr;

  rel_addr_gen dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int idx [8];
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int col = 0; col < 100; col++) begin
      int prev;
      prev = 0;
      for (int k = 0; k < 8; k++) begin
        if (col == 0 && k < 5) idx[k] = (k == 0) ? 5 : (k == 1) ? 12 : (k == 2) ? 18 : (k == 3) ? 26 : 32;
        else idx[k] = prev + ((k == 0) ? $urandom_range(0, 31) : $urandom_range(1, 31));
        if (idx[k] > 255) idx[k] = prev;  // stay in range
        prev = idx[k];
      end
      prev = 0;
      for (int k = 0; k < 8; k++) begin
        @(negedge clk);
        reset_col = (k == 0);
        step = 1;
        delta = 5'(idx[k] - prev);
        prev = idx[k];
        #1;
        checks++;
        if (addr !== 8'(idx[k])) begin
          failures++;
          $display("col %0d nz %0d: addr %0d expected %0d", col, k, addr, idx[k]);
        end
      end
      @(negedge clk);
      step = 0; reset_col = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
