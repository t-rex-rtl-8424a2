// tb_nu_dequant: self-checking test of the LUT-based non-uniform dequantizer.
// Loads several random level tables (as when the model switches between
// encoder/decoder and attention/feed-forward W_S) and checks random code
// vectors against a table lookup done in the testbench.
module tb_nu_dequant;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic lut_we = 0;
  logic [15:0] lut_wdata [16];
  logic [3:0]  code [16];
  logic [15:0] value [16];
  logic [15:0] levels [16];

  nu_dequant dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++) begin lut_wdata[i] = 0; code[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 8; t++) begin
      @(negedge clk);
      for (int i = 0; i < 16; i++) begin
        levels[i] = 16'($urandom);
        lut_wdata[i] = levels[i];
      end
      lut_we = 1;
      @(negedge clk);
      lut_we = 0;
      for (int i = 0; i < 16; i++) lut_wdata[i] = 16'($urandom);   // must not be taken
      for (int v = 0; v < 20; v++) begin
        for (int i = 0; i < 16; i++) code[i] = 4'($urandom);
        @(negedge clk);
        for (int i = 0; i < 16; i++) begin
          checks++;
          if (value[i] !== levels[code[i]]) begin
            failures++;
            $display("code %0d gave %h expected %h", code[i], value[i], levels[code[i]]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
