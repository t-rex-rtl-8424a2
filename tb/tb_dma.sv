// tb_dma: self-checking test of the DMA engine.
// An external memory model in the testbench answers requests with random
// ready stalls and random read latency; a word array stands in for the GB
// port (one cycle read latency). Checks a 20-word read into the GB, a
// 12-word write back to a different external address, and a zero-length
// transfer, plus the transfer time against a lower bound.
module tb_dma;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, dir = 0, busy, done;
  logic [23:0] ext_addr = 0;
  logic [15:0] gb_addr = 0, len = 0;
  logic ext_req_valid, ext_req_ready, ext_req_we, ext_rsp_valid;
  logic [23:0] ext_req_addr;
  logic [255:0] ext_req_wdata, ext_rsp_rdata;
  logic gb_en, gb_we;
  logic [15:0] gb_a;
  logic [255:0] gb_wdata, gb_rdata;

  dma dut (.*);

  logic [255:0] ext_mem [1024];
  logic [255:0] gb_mem [256];

  // GB port model
  always_ff @(posedge clk) if (gb_en) begin
    if (gb_we) gb_mem[gb_a[7:0]] <= gb_wdata;
    else       gb_rdata <= gb_mem[gb_a[7:0]];
  end

  // external memory model: random ready, reads answered 1..4 cycles later
  int rsp_wait = -1;
  logic [23:0] rsp_addr;
  initial begin
    ext_req_ready = 0; ext_rsp_valid = 0; ext_rsp_rdata = 0;
    forever begin
      @(negedge clk);
      ext_rsp_valid = 0;
      if (rsp_wait == 0) begin
        ext_rsp_valid = 1;
        ext_rsp_rdata = ext_mem[rsp_addr[9:0]];
      end
      if (rsp_wait >= 0) rsp_wait--;
      ext_req_ready = ($urandom_range(0, 2) != 0);
      @(posedge clk);
      if (ext_req_valid && ext_req_ready) begin
        if (ext_req_we) ext_mem[ext_req_addr[9:0]] = ext_req_wdata;
        else begin rsp_wait = $urandom_range(0, 3); rsp_addr = ext_req_addr; end
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic xfer(input bit d, input int ea, input int ga, input int n, output int cyc);
    @(negedge clk);
    start = 1; dir = d; ext_addr = 24'(ea); gb_addr = 16'(ga); len = 16'(n);
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int cyc;
    for (int k = 0; k < 1024; k++) ext_mem[k] = {8{$urandom}};
    for (int k = 0; k < 256; k++) gb_mem[k] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    xfer(0, 100, 10, 20, cyc);
    for (int k = 0; k < 20; k++) begin
      checks++;
      if (gb_mem[10 + k] !== ext_mem[100 + k]) begin failures++; $display("read word %0d", k); end
    end
    checks++;
    if (cyc < 2 * 20) begin failures++; $display("read took %0d cycles", cyc); end
    xfer(1, 500, 12, 12, cyc);
    for (int k = 0; k < 12; k++) begin
      checks++;
      if (ext_mem[500 + k] !== gb_mem[12 + k]) begin failures++; $display("write word %0d", k); end
    end
    checks++;
    if (cyc < 3 * 12) begin failures++; $display("write took %0d cycles", cyc); end
    xfer(0, 0, 0, 0, cyc);
    checks++;
    if (cyc != 1) begin failures++; $display("empty transfer took %0d cycles", cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
