// dma_load: copies a block of words from external memory into a buffer.
//
// One instance feeds the input buffer and one the weights buffer. A start
// pulse latches the source word address, the destination buffer word
// address and the length in words (len >= 1). The DMA then issues read
// requests on its memory channel as fast as the channel accepts them
// (valid/ready) and writes every read response, which arrives in request
// order, into the buffer at the next destination address. `busy` stays high
// from the start pulse until the last response is written, and `done`
// pulses on the clock after that; `busy` also tells the memory interface to
// keep this DMA's grant while responses are outstanding.
//
// The DMA is named in the paper's accelerator figure; its descriptor,
// handshake and timing are this design's.
module dma_load
  import mfdfp_pkg::*;
#(
  parameter int unsigned LEN_W = 20,
  parameter int unsigned DST_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  maddr_t           src,
  input  logic [DST_W-1:0] dst,
  input  logic [LEN_W-1:0] len,
  output logic             busy,
  output logic             done,
  // memory channel
  output logic             req_valid,
  input  logic             req_ready,
  output mem_req_t         req,
  input  logic             rsp_valid,
  input  mword_t           rsp_data,
  // buffer write port
  output logic             wr_en,
  output logic [DST_W-1:0] wr_addr,
  output mword_t           wr_data
);
  maddr_t           src_q;
  logic [DST_W-1:0] dst_q;
  logic [LEN_W-1:0] len_q, issued, received;

  assign req_valid = busy && (issued != len_q);
  assign req.we    = 1'b0;
  assign req.addr  = src_q + maddr_t'(issued);
  assign req.wdata = '0;

  assign wr_en   = busy && rsp_valid;
  assign wr_addr = dst_q + DST_W'(received);
  assign wr_data = rsp_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      src_q    <= '0;
      dst_q    <= '0;
      len_q    <= '0;
      issued   <= '0;
      received <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy     <= 1'b1;
          src_q    <= src;
          dst_q    <= dst;
          len_q    <= len;
          issued   <= '0;
          received <= '0;
        end
      end else begin
        if (req_valid && req_ready) issued <= issued + 1'b1;
        if (rsp_valid) begin
          received <= received + 1'b1;
          if (received + 1'b1 == len_q) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  // A response never arrives for a request that was not issued.
  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    rsp_valid |-> busy && (received < issued));
endmodule
