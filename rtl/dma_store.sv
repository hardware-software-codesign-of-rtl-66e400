// dma_store: copies a block of words from the output buffer to external
// memory.
//
// A start pulse latches the buffer word address, the destination memory word
// address and the length in words (len >= 1). For each word the DMA reads
// the buffer (one clock), then holds a write request on its memory channel
// until the channel accepts it (valid/ready), so a word takes at least 2
// clocks. `done` pulses on the clock after the last write is accepted.
//
// The DMA is named in the paper's accelerator figure; its descriptor,
// handshake and timing are this design's.
module dma_store
  import mfdfp_pkg::*;
#(
  parameter int unsigned LEN_W = 16,
  parameter int unsigned SRC_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [SRC_W-1:0] src,
  input  maddr_t           dst,
  input  logic [LEN_W-1:0] len,
  output logic             busy,
  output logic             done,
  // buffer read port (data one clock after rd_en)
  output logic             rd_en,
  output logic [SRC_W-1:0] rd_addr,
  input  mword_t           rd_data,
  // memory channel
  output logic             req_valid,
  input  logic             req_ready,
  output mem_req_t         req
);
  typedef enum logic [1:0] {S_IDLE, S_READ, S_WRITE} state_e;
  state_e           state;
  logic [SRC_W-1:0] src_q;
  maddr_t           dst_q;
  logic [LEN_W-1:0] len_q, cnt;

  assign busy      = (state != S_IDLE);
  assign rd_en     = (state == S_READ);
  assign rd_addr   = src_q + SRC_W'(cnt);
  assign req_valid = (state == S_WRITE);
  assign req.we    = 1'b1;
  assign req.addr  = dst_q + maddr_t'(cnt);
  assign req.wdata = rd_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      src_q <= '0;
      dst_q <= '0;
      len_q <= '0;
      cnt   <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          src_q <= src;
          dst_q <= dst;
          len_q <= len;
          cnt   <= '0;
          state <= S_READ;
        end
        S_READ: state <= S_WRITE;
        S_WRITE: if (req_ready) begin
          if (cnt + 1'b1 == len_q) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            cnt   <= cnt + 1'b1;
            state <= S_READ;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
