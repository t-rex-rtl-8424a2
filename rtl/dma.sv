// dma: direct memory access engine between external memory and the GB.
//
// Copies len words from external memory to the global buffer (dir=0) or from
// the global buffer to external memory (dir=1), one word at a time with one
// request in flight. External requests use a valid/ready handshake
// (ext_req_*); read data returns on ext_rsp_valid/ext_rsp_rdata, any number
// of cycles later. The GB side is a synchronous port with one cycle of read
// latency. done pulses once the last word is written. The paper only names
// the DMA; this is the simplest engine that does the job.
module dma #(
  parameter int unsigned WORD_W = 256,
  parameter int unsigned AW     = 16,
  parameter int unsigned EAW    = 24
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              dir,
  input  logic [EAW-1:0]    ext_addr,
  input  logic [AW-1:0]     gb_addr,
  input  logic [15:0]       len,
  output logic              busy,
  output logic              done,
  // external memory
  output logic              ext_req_valid,
  input  logic              ext_req_ready,
  output logic              ext_req_we,
  output logic [EAW-1:0]    ext_req_addr,
  output logic [WORD_W-1:0] ext_req_wdata,
  input  logic              ext_rsp_valid,
  input  logic [WORD_W-1:0] ext_rsp_rdata,
  // global buffer port
  output logic              gb_en,
  output logic              gb_we,
  output logic [AW-1:0]     gb_a,
  output logic [WORD_W-1:0] gb_wdata,
  input  logic [WORD_W-1:0] gb_rdata
);
  typedef enum logic [2:0] {S_IDLE, S_RREQ, S_RWAIT, S_GBRD, S_GBWAIT, S_WREQ, S_DONE} state_e;
  state_e state;

  logic [EAW-1:0]    ea;
  logic [AW-1:0]     ga;
  logic [15:0]       left;
  logic [WORD_W-1:0] data;

  always_comb begin
    ext_req_valid = (state == S_RREQ) || (state == S_WREQ);
    ext_req_we    = (state == S_WREQ);
    ext_req_addr  = ea;
    ext_req_wdata = data;
    gb_en         = ((state == S_RWAIT) && ext_rsp_valid) || (state == S_GBRD);
    gb_we         = (state == S_RWAIT);
    gb_a          = ga;
    gb_wdata      = ext_rsp_rdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      ea    <= '0;
      ga    <= '0;
      left  <= '0;
      data  <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          ea    <= ext_addr;
          ga    <= gb_addr;
          left  <= len;
          if (len == 16'd0) state <= S_DONE;
          else              state <= dir ? S_GBRD : S_RREQ;
        end
        S_RREQ:  if (ext_req_ready) state <= S_RWAIT;
        S_RWAIT: if (ext_rsp_valid) begin
          ea   <= ea + 1'b1;
          ga   <= ga + 1'b1;
          left <= left - 1'b1;
          state <= (left == 16'd1) ? S_DONE : S_RREQ;
        end
        S_GBRD:   state <= S_GBWAIT;
        S_GBWAIT: begin
          data  <= gb_rdata;
          state <= S_WREQ;
        end
        S_WREQ: if (ext_req_ready) begin
          ea   <= ea + 1'b1;
          ga   <= ga + 1'b1;
          left <= left - 1'b1;
          state <= (left == 16'd1) ? S_DONE : S_GBRD;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);

  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    ext_req_valid && !ext_req_ready |=> ext_req_valid && $stable(ext_req_addr));
endmodule
