// tb_trf: self-checking test of the two-direction accessible register file.
// Writes random lines in random directions, mirrors every write in a plain
// array, and after each write reads random rows and columns (and the whole
// array output) and compares them with the mirror.
module tb_trf;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we = 0, wdir = 0, rdir = 0;
  logic [3:0] waddr = 0, raddr = 0;
  logic [15:0] wdata [N], rdata [N];
  logic [15:0] q [N][N];
  logic [15:0] model [N][N];

  trf #(.N(N), .W(16)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      wdata[i] = 0;
      for (int j = 0; j < N; j++) model[i][j] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      we = 1; wdir = 1'($urandom); waddr = 4'($urandom);
      for (int i = 0; i < N; i++) wdata[i] = 16'($urandom);
      for (int i = 0; i < N; i++)
        if (wdir) model[i][waddr] = wdata[i]; else model[waddr][i] = wdata[i];
      @(negedge clk);
      we = 0;
      for (int r = 0; r < 2; r++) begin
        rdir = 1'(r); raddr = 4'($urandom);
        #1;
        for (int i = 0; i < N; i++) begin
          checks++;
          if (rdata[i] !== (rdir ? model[i][raddr] : model[raddr][i])) begin
            failures++;
            $display("dir %0d line %0d elem %0d: %h", rdir, raddr, i, rdata[i]);
          end
        end
      end
      checks++;
      if (q !== model) begin failures++; $display("array output mismatch"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
