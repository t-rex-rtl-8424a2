// tb_global_buffer: self-checking test of the global buffer.
// Random reads and writes on both ports (never both writing one address in a
// cycle) against a sparse reference model; checks the one-cycle read latency
// and that the first and last words of every region are reachable.
module tb_global_buffer;
  import trex_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic p0_en = 0, p0_we = 0, p1_en = 0, p1_we = 0;
  logic [15:0] p0_addr = 0, p1_addr = 0;
  logic [255:0] p0_wdata = 0, p1_wdata = 0, p0_rdata, p1_rdata;
  logic [255:0] model [int];

  global_buffer dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [255:0] rnd();
    return {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin
    int addrs [10] = '{GB_IO0_BASE, GB_IO1_BASE - 1, GB_IO1_BASE, GB_ENC_BASE - 1, GB_ENC_BASE,
                       GB_WS_BASE - 1, GB_WS_BASE, GB_WD_BASE - 1, GB_WD_BASE, GB_DEPTH - 1};
    int pool [64];
    for (int k = 0; k < 64; k++) pool[k] = (k < 10) ? addrs[k] : $urandom_range(0, GB_DEPTH - 1);
    // fill the pool through both ports
    for (int k = 0; k < 64; k++) begin
      @(negedge clk);
      p0_en = 1; p0_we = 1; p0_addr = 16'(pool[k]); p0_wdata = rnd();
      model[pool[k]] = p0_wdata;
    end
    @(negedge clk);
    p0_en = 0; p0_we = 0;
    for (int t = 0; t < 2000; t++) begin
      int a0, a1;
      bit r0, r1;
      a0 = pool[$urandom_range(0, 63)];
      a1 = pool[$urandom_range(0, 63)];
      r0 = 1'($urandom); r1 = 1'($urandom);
      if (!r0 && !r1 && a0 == a1) r1 = 1;
      @(negedge clk);
      p0_en = 1; p0_we = !r0; p0_addr = 16'(a0);
      p1_en = 1; p1_we = !r1; p1_addr = 16'(a1);
      p0_wdata = rnd(); p1_wdata = rnd();
      @(negedge clk);
      p0_en = 0; p1_en = 0;
      if (r0) begin
        checks++;
        if (p0_rdata !== model[a0]) begin failures++; $display("port 0 read %0d", a0); end
      end
      if (r1) begin
        checks++;
        if (p1_rdata !== model[a1]) begin failures++; $display("port 1 read %0d", a1); end
      end
      if (!r0) model[a0] = p0_wdata;
      if (!r1) model[a1] = p1_wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
