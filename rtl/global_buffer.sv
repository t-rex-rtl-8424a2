// global_buffer: on-chip global buffer (GB).
//
// Holds everything the cores exchange: two intermediate input/output areas,
// the encoder output, the shared dense parameters W_S (loaded once and kept
// for all layers) and the distinct sparse parameters W_D of the current
// layer. Region bases are in trex_pkg. All data movement between the cores
// goes through this memory. It is a word-addressed array of WORD_W-bit words
// (one 16-element line of 16b values) with two synchronous ports: port 0 for
// the DMA, port 1 for the compute side. Reads return data the cycle after
// en; a write on both ports to one address in one cycle is not allowed.
// The regions follow the paper; the word width, the two ports and the region
// sizes (1280 kB of the chip's 1,320 kB of on-chip memory) are this design's
// choices. Modelled as an array; a chip would use SRAM macros.
module global_buffer #(
  parameter int unsigned WORD_W = 256,
  parameter int unsigned DEPTH  = 40960,
  parameter int unsigned AW     = 16
) (
  input  logic              clk,
  input  logic              p0_en,
  input  logic              p0_we,
  input  logic [AW-1:0]     p0_addr,
  input  logic [WORD_W-1:0] p0_wdata,
  output logic [WORD_W-1:0] p0_rdata,
  input  logic              p1_en,
  input  logic              p1_we,
  input  logic [AW-1:0]     p1_addr,
  input  logic [WORD_W-1:0] p1_wdata,
  output logic [WORD_W-1:0] p1_rdata
);
  logic [WORD_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (p0_en) begin
      if (p0_we) mem[p0_addr] <= p0_wdata;
      else       p0_rdata     <= mem[p0_addr];
    end
    if (p1_en) begin
      if (p1_we) mem[p1_addr] <= p1_wdata;
      else       p1_rdata     <= mem[p1_addr];
    end
  end

  a_no_double_write: assert property (@(posedge clk)
    !(p0_en && p0_we && p1_en && p1_we && p0_addr == p1_addr));
endmodule
