// controller: the control circuitry that runs one layer on the accelerator.
//
// The host writes a layer descriptor (layer_cfg_t) and pulses `start`. The
// layer computes, for every input vector p and every output tile ot of 16
// neurons,  out[ot][p] = NL(route(sum_t x[p][t] (*) w[ot][t]))  where t runs
// over the input tiles of 16 activations and (*) is the shift-add of one
// processing unit. The loop order keeps the weights of one output tile in
// the weights buffer while every input vector streams past them:
//
//   for ot in 0..n_out_tiles-1:
//     load the n_in_tiles weight rows of tile ot              (weight DMA)
//     for p in 0..n_vec-1:
//       wait until input vector p is in its input-buffer bank
//       stream rows 0..n_in_tiles-1 into the NPU, one per clock
//       write the NPU's output row into the current output-buffer bank
//       when the bank is full or p is the last vector:
//         hand the bank to the output DMA and switch banks
//   wait for the last store
//
// Two sequencers share the work. The compute sequencer above runs the
// loop. The input prefetcher loads the input vectors in the same order,
// alternately into the two banks of the input buffer, as soon as a bank is
// free, so the load of vector p+1 overlaps the computation of vector p. A
// bank is freed when its last row has been read. A layer with a single
// input vector (a fully connected layer) loads it once and keeps it for
// every output tile. The output buffer has two banks as well: a full bank
// is stored by the output DMA while the NPU fills the other one; the
// sequencer waits only if the other bank's store has not finished when its
// own bank fills, and at the end of the layer.
//
// Memory layout (word addresses, 64-bit words): input vector p starts at
// in_addr + p*n_in_tiles*XWPR, the weights of tile ot at
// w_addr + ot*n_in_tiles*WWPR, and output row (ot, p) at
// out_addr + (ot*n_vec + p)*OWPR. The pointers are kept as running sums, so
// the controller needs no multiplier.
//
// Timing: the NPU takes one input tile per clock; its result appears 3
// clocks after the last buffer read (1 read latency + 2 pipeline). A
// descriptor with a zero count or more input tiles than a buffer bank holds
// is refused: `done` and `err` pulse without running.
//
// From the paper: tile-based operation (a few physical neurons fed a new
// set of data every cycle) and separate input, weight and output memory
// paths that keep transfers apart from computation. This design's choices:
// the descriptor, the loop order, the memory layout, the double-banked input
// and output buffers, and that weight loads still pause computation.
module controller
  import mfdfp_pkg::*;
#(
  parameter int unsigned NUM_PU    = 1,
  parameter int unsigned IN_DEPTH  = 1024,   // rows per input-buffer bank
  parameter int unsigned W_DEPTH   = 1024,
  parameter int unsigned OUT_DEPTH = 16,     // rows per output-buffer bank
  localparam int unsigned XWPR = N_SYN * IN_W / MEM_W,                    // 2
  localparam int unsigned WWPR = NUM_PU * N_NEURON * N_SYN * W_W / MEM_W, // 16
  localparam int unsigned OWPR = NUM_PU * N_NEURON * OUT_W / MEM_W,       // 2
  localparam int unsigned XR_W = $clog2(2 * IN_DEPTH),
  localparam int unsigned WR_W = $clog2(W_DEPTH),
  localparam int unsigned OA_W = $clog2(OUT_DEPTH)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  layer_cfg_t  cfg,
  input  logic        start,
  output logic        busy,
  output logic        done,
  output logic        err,
  // DMA control
  output logic        xdma_start,
  output maddr_t      xdma_src,
  output logic [15:0] xdma_dst,
  output logic [19:0] xdma_len,
  input  logic        xdma_done,
  output logic        wdma_start,
  output maddr_t      wdma_src,
  output logic [19:0] wdma_len,
  input  logic        wdma_done,
  output logic        odma_start,
  output logic [7:0]  odma_src,
  output maddr_t      odma_dst,
  output logic [15:0] odma_len,
  input  logic        odma_done,
  // buffer reads
  output logic            buf_rd_en,
  output logic [XR_W-1:0] xbuf_rd_addr,
  output logic [WR_W-1:0] wbuf_rd_addr,
  // NPU
  output logic        npu_valid,
  output logic        npu_first,
  output logic        npu_last,
  output radix_t      npu_m,
  output radix_t      npu_n,
  output nl_mode_e    npu_nl,
  input  logic        npu_y_valid,
  // output buffer write
  output logic            obuf_wr_en,
  output logic [OA_W:0]   obuf_wr_addr
);
  typedef enum logic [2:0] {
    C_IDLE, C_LOAD_W, C_WAIT_X, C_STREAM, C_DRAIN, C_STORE, C_FINISH
  } state_e;

  // ---- compute sequencer ----
  state_e      state;
  layer_cfg_t  c;
  logic [15:0] ot, p, t;
  logic        dma_wait;      // the weight DMA started here is running
  logic        s_wait;        // the output DMA is storing a bank
  logic        ob;            // output-buffer bank being filled
  logic        cb;            // input bank being computed on
  maddr_t      w_ptr, o_ptr;
  logic [OA_W:0] ob_cnt;      // rows waiting in the output buffer
  logic        rd_q, first_q, last_q;
  logic        cfg_bad;
  logic        single;        // one input vector: load it once, keep it

  // ---- input prefetcher ----
  logic        l_act;         // more input vectors to load
  logic        l_wait;        // input DMA running
  logic        lb;            // bank being loaded
  logic [15:0] lp, lot;       // vector and output tile of the next load
  maddr_t      x_ptr;
  logic [1:0]  full;          // bank holds a loaded vector not yet consumed
  logic [1:0]  set_full, clr_full;

  assign cfg_bad = (cfg.n_vec == 0) || (cfg.n_in_tiles == 0) || (cfg.n_out_tiles == 0) ||
                   (32'(cfg.n_in_tiles) > IN_DEPTH) || (32'(cfg.n_in_tiles) > W_DEPTH);
  assign single  = (c.n_vec == 1);

  assign busy      = (state != C_IDLE);
  assign npu_m     = c.m;
  assign npu_n     = c.n;
  assign npu_nl    = c.nl;
  assign npu_valid = rd_q;
  assign npu_first = first_q;
  assign npu_last  = last_q;

  assign buf_rd_en    = (state == C_STREAM);
  assign xbuf_rd_addr = {cb, (XR_W-1)'(t)};
  assign wbuf_rd_addr = WR_W'(t);

  assign xdma_src = x_ptr;
  assign xdma_dst = lb ? 16'(IN_DEPTH * XWPR) : 16'd0;
  assign xdma_len = 20'(c.n_in_tiles) * 20'(XWPR);
  assign wdma_src = w_ptr;
  assign wdma_len = 20'(c.n_in_tiles) * 20'(WWPR);
  assign obuf_wr_en   = npu_y_valid;
  assign obuf_wr_addr = {ob, OA_W'(ob_cnt)};

  // A bank is released when its last row has been read, unless the layer
  // has a single input vector, which then stays for every output tile.
  always_comb begin
    set_full = '0;
    clr_full = '0;
    if (l_wait && xdma_done) set_full[lb] = 1'b1;
    if (state == C_STREAM && t == c.n_in_tiles - 1'b1 && !single) clr_full[cb] = 1'b1;
  end

  // ---- input prefetcher: loads vector after vector, in the order the
  // compute sequencer consumes them, into whichever bank is free ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l_act      <= 1'b0;
      l_wait     <= 1'b0;
      lb         <= 1'b0;
      lp         <= '0;
      lot        <= '0;
      x_ptr      <= '0;
      full       <= '0;
      xdma_start <= 1'b0;
    end else begin
      xdma_start <= 1'b0;
      full       <= (full | set_full) & ~clr_full;
      if (state == C_IDLE) begin
        if (start && !cfg_bad) begin
          l_act  <= 1'b1;
          l_wait <= 1'b0;
          lb     <= 1'b0;
          lp     <= '0;
          lot    <= '0;
          x_ptr  <= cfg.in_addr;
          full   <= '0;
        end
      end else if (l_wait) begin
        if (xdma_done) begin
          l_wait <= 1'b0;
          lb     <= ~lb;
          if (lp + 1'b1 == c.n_vec) begin
            lp    <= '0;
            lot   <= lot + 1'b1;
            x_ptr <= c.in_addr;
            if (single || lot + 1'b1 == c.n_out_tiles) l_act <= 1'b0;
          end else begin
            lp    <= lp + 1'b1;
            x_ptr <= x_ptr + maddr_t'(xdma_len);
          end
        end
      end else if (l_act && !full[lb]) begin
        xdma_start <= 1'b1;
        l_wait     <= 1'b1;
      end
    end
  end

  // ---- compute sequencer ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= C_IDLE;
      c          <= '0;
      ot         <= '0;
      p          <= '0;
      t          <= '0;
      cb         <= 1'b0;
      dma_wait   <= 1'b0;
      s_wait     <= 1'b0;
      ob         <= 1'b0;
      odma_src   <= '0;
      odma_dst   <= '0;
      odma_len   <= '0;
      w_ptr      <= '0;
      o_ptr      <= '0;
      ob_cnt     <= '0;
      rd_q       <= 1'b0;
      first_q    <= 1'b0;
      last_q     <= 1'b0;
      done       <= 1'b0;
      err        <= 1'b0;
      wdma_start <= 1'b0;
      odma_start <= 1'b0;
    end else begin
      done       <= 1'b0;
      err        <= 1'b0;
      wdma_start <= 1'b0;
      odma_start <= 1'b0;
      // buffer read data reaches the NPU one clock after the read
      rd_q    <= buf_rd_en;
      first_q <= buf_rd_en && (t == 0);
      last_q  <= buf_rd_en && (t == c.n_in_tiles - 1'b1);
      if (odma_done) s_wait <= 1'b0;

      unique case (state)
        C_IDLE: if (start) begin
          if (cfg_bad) begin
            done <= 1'b1;
            err  <= 1'b1;
          end else begin
            c        <= cfg;
            ot       <= '0;
            p        <= '0;
            cb       <= 1'b0;
            w_ptr    <= cfg.w_addr;
            o_ptr    <= cfg.out_addr;
            ob_cnt   <= '0;
            ob       <= 1'b0;
            dma_wait <= 1'b0;
            state    <= C_LOAD_W;
          end
        end

        C_LOAD_W: if (!dma_wait) begin
          wdma_start <= 1'b1;
          dma_wait   <= 1'b1;
        end else if (wdma_done) begin
          dma_wait <= 1'b0;
          w_ptr    <= w_ptr + maddr_t'(wdma_len);
          state    <= C_WAIT_X;
        end

        C_WAIT_X: if (full[cb]) begin
          t     <= '0;
          state <= C_STREAM;
        end

        C_STREAM: begin
          t <= t + 1'b1;
          if (t == c.n_in_tiles - 1'b1) begin
            if (!single) cb <= ~cb;
            state <= C_DRAIN;
          end
        end

        C_DRAIN: if (npu_y_valid) begin
          ob_cnt <= ob_cnt + 1'b1;
          p      <= p + 1'b1;
          if ((32'(ob_cnt) + 1 == OUT_DEPTH) || (p + 1'b1 == c.n_vec)) begin
            state <= C_STORE;
          end else begin
            state <= C_WAIT_X;
          end
        end

        // hand the filled bank to the output DMA once the other bank's
        // store has finished, then carry on in the other bank
        C_STORE: if (!s_wait) begin
          odma_start <= 1'b1;
          s_wait     <= 1'b1;
          odma_src   <= ob ? 8'(OUT_DEPTH * OWPR) : 8'd0;
          odma_dst   <= o_ptr;
          odma_len   <= 16'(ob_cnt) * 16'(OWPR);
          o_ptr      <= o_ptr + maddr_t'(32'(ob_cnt) * OWPR);
          ob_cnt     <= '0;
          ob         <= ~ob;
          if (p != c.n_vec) begin
            state <= C_WAIT_X;
          end else if (ot + 1'b1 != c.n_out_tiles) begin
            ot    <= ot + 1'b1;
            p     <= '0;
            state <= C_LOAD_W;
          end else begin
            state <= C_FINISH;
          end
        end

        C_FINISH: if (!s_wait) begin
          done  <= 1'b1;
          state <= C_IDLE;
        end

        default: state <= C_IDLE;
      endcase
    end
  end

  // The sequencer only streams a bank the prefetcher has filled.
  a_stream_full: assert property (@(posedge clk) disable iff (!rst_n)
    state == C_STREAM |-> full[cb]);
  // A store is only started when the previous one has finished.
  a_one_store: assert property (@(posedge clk) disable iff (!rst_n)
    odma_start |-> !$past(s_wait) || $past(odma_done));
endmodule
