// trf: two-direction accessible register file.
//
// An N x N array of W-bit registers that can be written and read one row or
// one column at a time. With dir=0 a port addresses row addr (cells
// [addr][0..N-1]); with dir=1 it addresses column addr (cells [0..N-1][addr]).
// This lets a matrix that arrives row by row leave column by column (and the
// reverse) without extra SRAM accesses, which is how the cores' input and
// output buffers are built in the paper. One synchronous write port and one
// combinational read port; q shows the whole array
// for units that consume all cells in parallel. A write is visible to reads on the next cycle.
// The port names (data in, dir, addr, data out) follow the paper's figure;
// the reset to zero is this design's choice.
module trf #(
  parameter int unsigned N  = 16,
  parameter int unsigned W  = 16,
  localparam int unsigned AW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic          wdir,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata [N],
  input  logic          rdir,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata [N],
  output logic [W-1:0]  q     [N][N]
);
  logic [W-1:0] regs [N][N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          regs[i][j] <= '0;
    end else if (we) begin
      for (int i = 0; i < N; i++) begin
        if (wdir) regs[i][waddr] <= wdata[i];
        else      regs[waddr][i] <= wdata[i];
      end
    end
  end

  assign q = regs;

  always_comb begin
    for (int i = 0; i < N; i++)
      rdata[i] = rdir ? regs[i][raddr] : regs[raddr][i];
  end
endmodule
