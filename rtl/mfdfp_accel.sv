// mfdfp_accel: multiplier-free dynamic fixed-point DNN accelerator (top).
//
// A tile-based accelerator for 8-bit dynamic fixed-point networks whose
// weights are signed powers of two. It joins
//   - the memory subsystem: a load DMA and a two-bank buffer for input
//     activations (one bank is loaded while the other is computed on), a
//     load DMA and buffer for weights, a two-bank output buffer (one bank
//     is stored while the other is filled) and its store DMA;
//   - the NPU: NUM_PU processing units of 16 neurons x 16 synapses, where
//     every multiplication is an arithmetic shift and the radix point of the
//     inputs (m) and outputs (n) can change from layer to layer;
//   - the control circuitry that runs one layer per start pulse;
//   - the memory interface that shares one external memory port among the
//     three DMAs.
//
// Host interface: `cfg` (layer descriptor, see mfdfp_pkg) is sampled on the
// clock where `start` is high while `busy` is low; `done` pulses when the
// last output has been written to memory, with `err` if the descriptor was
// refused. `sat` pulses with a bit per neuron when an output row written to
// the output buffer holds a saturated value.
// External memory port: 64-bit words, word addresses; requests use a
// valid/ready handshake, read data returns in request order on
// mem_rsp_valid/mem_rsp_data any number of clocks later.
//
// The organisation follows the paper's accelerator figure; sizes that the
// paper does not give (buffer depths, memory word, the input
// and output double buffering) are this design's. IN_DEPTH and OUT_DEPTH
// are the depths of one input and one output bank.
module mfdfp_accel
  import mfdfp_pkg::*;
#(
  parameter int unsigned NUM_PU    = 1,
  parameter int unsigned IN_DEPTH  = 1024,
  parameter int unsigned W_DEPTH   = 1024,
  parameter int unsigned OUT_DEPTH = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  layer_cfg_t cfg,
  input  logic       start,
  output logic       busy,
  output logic       done,
  output logic       err,
  output logic [NUM_PU*N_NEURON-1:0] sat,
  output logic       mem_req_valid,
  input  logic       mem_req_ready,
  output mem_req_t   mem_req,
  input  logic       mem_rsp_valid,
  input  mword_t     mem_rsp_data
);
  localparam int unsigned XWPR = N_SYN * IN_W / MEM_W;
  localparam int unsigned WWPR = NUM_PU * N_NEURON * N_SYN * W_W / MEM_W;
  localparam int unsigned OWPR = NUM_PU * N_NEURON * OUT_W / MEM_W;
  localparam int unsigned XR_W = $clog2(2 * IN_DEPTH);
  localparam int unsigned WR_W = $clog2(W_DEPTH);
  localparam int unsigned OA_W = $clog2(OUT_DEPTH);
  localparam int unsigned XA_W = $clog2(2 * IN_DEPTH * XWPR);
  localparam int unsigned WA_W = $clog2(W_DEPTH * WWPR);
  localparam int unsigned OW_W = $clog2(2 * OUT_DEPTH * OWPR);

  // controller <-> DMAs
  logic        xdma_start, wdma_start, odma_start;
  logic        xdma_done,  wdma_done,  odma_done;
  maddr_t      xdma_src, wdma_src, odma_dst;
  logic [15:0] xdma_dst;
  logic [19:0] xdma_len, wdma_len;
  logic [15:0] odma_len;
  logic [7:0]  odma_src;

  // memory interface
  logic     a_busy [3];
  logic     a_req_valid [3];
  logic     a_req_ready [3];
  mem_req_t a_req [3];
  logic     a_rsp_valid [3];
  mword_t   a_rsp_data;
  logic     unused_rsp;

  // buffers
  logic            x_wr_en, w_wr_en, o_rd_en;
  logic [15:0]     x_wr_addr, w_wr_addr;
  mword_t          x_wr_data, w_wr_data, o_rd_data;
  logic [7:0]      o_rd_addr;
  logic            buf_rd_en;
  logic [XR_W-1:0] xbuf_rd_addr;
  logic [WR_W-1:0] wbuf_rd_addr;
  logic            obuf_wr_en;
  logic [OA_W:0]   obuf_wr_addr;

  // NPU
  act_t     x [N_SYN];
  wcode_t   w [NUM_PU][N_NEURON][N_SYN];
  act_t     y [NUM_PU][N_NEURON];
  logic     npu_valid, npu_first, npu_last, npu_y_valid;
  radix_t   npu_m, npu_n;
  nl_mode_e npu_nl;
  logic [NUM_PU*N_NEURON-1:0] npu_sat;

  controller #(
    .NUM_PU(NUM_PU), .IN_DEPTH(IN_DEPTH), .W_DEPTH(W_DEPTH), .OUT_DEPTH(OUT_DEPTH)
  ) u_ctrl (
    .clk, .rst_n, .cfg, .start, .busy, .done, .err,
    .xdma_start, .xdma_src, .xdma_dst, .xdma_len, .xdma_done,
    .wdma_start, .wdma_src, .wdma_len, .wdma_done,
    .odma_start, .odma_src, .odma_dst, .odma_len, .odma_done,
    .buf_rd_en, .xbuf_rd_addr, .wbuf_rd_addr,
    .npu_valid, .npu_first, .npu_last, .npu_m, .npu_n, .npu_nl, .npu_y_valid,
    .obuf_wr_en, .obuf_wr_addr
  );

  dma_load #(.LEN_W(20), .DST_W(16)) u_xdma (
    .clk, .rst_n, .start(xdma_start), .src(xdma_src), .dst(xdma_dst), .len(xdma_len),
    .busy(a_busy[0]), .done(xdma_done),
    .req_valid(a_req_valid[0]), .req_ready(a_req_ready[0]), .req(a_req[0]),
    .rsp_valid(a_rsp_valid[0]), .rsp_data(a_rsp_data),
    .wr_en(x_wr_en), .wr_addr(x_wr_addr), .wr_data(x_wr_data)
  );

  dma_load #(.LEN_W(20), .DST_W(16)) u_wdma (
    .clk, .rst_n, .start(wdma_start), .src(wdma_src), .dst('0), .len(wdma_len),
    .busy(a_busy[1]), .done(wdma_done),
    .req_valid(a_req_valid[1]), .req_ready(a_req_ready[1]), .req(a_req[1]),
    .rsp_valid(a_rsp_valid[1]), .rsp_data(a_rsp_data),
    .wr_en(w_wr_en), .wr_addr(w_wr_addr), .wr_data(w_wr_data)
  );

  dma_store #(.LEN_W(16), .SRC_W(8)) u_odma (
    .clk, .rst_n, .start(odma_start), .src(odma_src), .dst(odma_dst), .len(odma_len),
    .busy(a_busy[2]), .done(odma_done),
    .rd_en(o_rd_en), .rd_addr(o_rd_addr), .rd_data(o_rd_data),
    .req_valid(a_req_valid[2]), .req_ready(a_req_ready[2]), .req(a_req[2])
  );
  assign unused_rsp = a_rsp_valid[2];

  mem_arbiter #(.N(3)) u_memif (
    .clk, .rst_n, .busy(a_busy), .req_valid(a_req_valid), .req_ready(a_req_ready),
    .req(a_req), .rsp_valid(a_rsp_valid), .rsp_data(a_rsp_data),
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_rsp_valid, .mem_rsp_data
  );

  in_buffer #(.DEPTH(2 * IN_DEPTH)) u_xbuf (
    .clk, .wr_en(x_wr_en), .wr_addr(XA_W'(x_wr_addr)), .wr_data(x_wr_data),
    .rd_en(buf_rd_en), .rd_addr(xbuf_rd_addr), .rd_x(x)
  );

  weight_buffer #(.DEPTH(W_DEPTH), .NUM_PU(NUM_PU)) u_wbuf (
    .clk, .wr_en(w_wr_en), .wr_addr(WA_W'(w_wr_addr)), .wr_data(w_wr_data),
    .rd_en(buf_rd_en), .rd_addr(wbuf_rd_addr), .rd_w(w)
  );

  npu #(.NUM_PU(NUM_PU)) u_npu (
    .clk, .rst_n, .valid(npu_valid), .first(npu_first), .last(npu_last),
    .x, .w, .m(npu_m), .n(npu_n), .nl(npu_nl), .y, .y_valid(npu_y_valid), .sat(npu_sat)
  );

  out_buffer #(.DEPTH(2 * OUT_DEPTH), .NUM_PU(NUM_PU)) u_obuf (
    .clk, .wr_en(obuf_wr_en), .wr_addr(obuf_wr_addr), .wr_y(y),
    .rd_en(o_rd_en), .rd_addr(OW_W'(o_rd_addr)), .rd_data(o_rd_data)
  );

  assign sat = npu_y_valid ? npu_sat : '0;
endmodule
