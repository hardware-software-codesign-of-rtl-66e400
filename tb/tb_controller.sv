// tb_controller: runs the layer controller against models of the three DMAs
// (each finishes a random number of clocks after its start pulse) and of
// the NPU (output 2 clocks after the last tile). The sequence of DMA
// commands, with addresses and lengths, and of compute passes is compared
// with the loop nest worked out in the testbench. Also checked: every pass
// streams its tiles on consecutive clocks with first/last on the right
// tiles, output rows go to consecutive output-buffer rows, a flush happens
// when an output bank is full, the input reload is skipped for a single
// vector, and a bad descriptor is refused with `err`. Input loads run ahead
// of computation, so each kind of event is compared in its own order; input
// loads must alternate between the two buffer banks, each pass must read the
// bank its vector was loaded into, and an input load must at some point
// overlap streaming. Output rows must fill the two output-buffer banks in
// turn, and each store must read the bank just filled.
module tb_controller;
  import mfdfp_pkg::*;
  localparam int OUT_DEPTH = 4;
  logic clk = 0, rst_n = 0;
  layer_cfg_t cfg;
  logic start = 0, busy, done, err;
  logic xdma_start, wdma_start, odma_start;
  logic xdma_done = 0, wdma_done = 0, odma_done = 0;
  maddr_t xdma_src, wdma_src, odma_dst;
  logic [15:0] xdma_dst;
  logic [19:0] xdma_len, wdma_len;
  logic [15:0] odma_len;
  logic buf_rd_en;
  logic [10:0] xbuf_rd_addr;
  logic [9:0] wbuf_rd_addr;
  logic npu_valid, npu_first, npu_last;
  radix_t npu_m, npu_n;
  nl_mode_e npu_nl;
  logic npu_y_valid = 0;
  logic obuf_wr_en;
  logic [2:0] obuf_wr_addr;
  logic [7:0] odma_src;
  bit wbank = 0;
  int checks = 0, failures = 0;
  int n_flush_full = 0, n_skip = 0, n_overlap = 0, n_loads = 0, n_passes = 0;
  bit x_busy = 0;

  typedef struct { byte kind; longint addr; longint len; } ev_t;  // W, X, O, S
  ev_t got[$], exp_q[$];
  byte kinds [4] = '{"W", "X", "O", "S"};

  controller #(.OUT_DEPTH(OUT_DEPTH)) dut (.*);

  always #5 clk = ~clk;

  // DMA models
  task automatic dma_model(ref logic st, ref logic dn);
    forever begin
      @(posedge clk); #1;
      if (st) begin
        repeat ($urandom_range(1, 6)) @(posedge clk);
        #1 dn = 1; @(posedge clk); #1 dn = 0;
      end
    end
  endtask
  initial dma_model(xdma_start, xdma_done);
  initial dma_model(wdma_start, wdma_done);
  initial dma_model(odma_start, odma_done);

  // event recorder and stream checker
  int  t_expect = 0, rows_in_buf = 0;
  logic [2:0] lastpipe = '0;
  always @(posedge clk) begin
    lastpipe <= {lastpipe[1:0], npu_valid && npu_last};
    npu_y_valid <= lastpipe[1];
  end
  always @(negedge clk) if (rst_n) begin
    if (wdma_start) got.push_back('{"W", wdma_src, wdma_len});
    if (xdma_start) begin
      got.push_back('{"X", xdma_src, xdma_len});
      checks++;
      if (xdma_dst != ((n_loads % 2) ? 16'd2048 : 16'd0)) begin failures++; $display("FAIL load %0d into bank at %0d", n_loads, xdma_dst); end
      n_loads++;
      x_busy = 1;
    end
    if (xdma_done) x_busy = 0;
    if (buf_rd_en && x_busy) n_overlap++;
    if (buf_rd_en) begin
      checks++;
      if (xbuf_rd_addr[10] != ((cfg.n_vec == 1) ? 1'b0 : 1'(n_passes % 2)) || xbuf_rd_addr[9:0] != wbuf_rd_addr) begin
        failures++; $display("FAIL pass %0d reads row %0d/%0d", n_passes, xbuf_rd_addr, wbuf_rd_addr);
      end
      if (wbuf_rd_addr == 10'(cfg.n_in_tiles - 1)) n_passes++;
    end
    if (odma_start) got.push_back('{"O", odma_dst, odma_len});
    if (npu_valid) begin
      checks++;
      if (npu_first != (t_expect == 0) || npu_last != (t_expect == cfg.n_in_tiles - 1) ||
          npu_m != cfg.m || npu_n != cfg.n || npu_nl != cfg.nl) begin
        failures++; $display("FAIL tile %0d flags", t_expect);
      end
      t_expect = npu_last ? 0 : t_expect + 1;
      if (npu_last) got.push_back('{"S", 0, cfg.n_in_tiles});
    end
    if (obuf_wr_en) begin
      checks++;
      if (int'(obuf_wr_addr[1:0]) != rows_in_buf || obuf_wr_addr[2] != wbank) begin
        failures++; $display("FAIL obuf row %0d exp %0d in bank %0d", obuf_wr_addr, rows_in_buf, wbank);
      end
      rows_in_buf++;
    end
    if (odma_start) begin
      checks++;
      if (odma_src != (wbank ? 8'(OUT_DEPTH * 2) : 8'd0)) begin failures++; $display("FAIL store from %0d", odma_src); end
      rows_in_buf = 0;
      wbank = !wbank;
    end
  end
  // streaming must be one tile per clock: a gap inside a pass is an error
  always @(negedge clk) if (rst_n && t_expect != 0 && !npu_valid) begin
    checks++; failures++; $display("FAIL gap in streaming");
  end

  task automatic run_layer(int nv, int ti, int to, int ia, int wa, int oa);
    int ob = 0, optr = oa;
    bit loaded = 0;
    exp_q.delete(); got.delete(); n_loads = 0; n_passes = 0; wbank = 0;
    for (int ot = 0; ot < to; ot++) begin
      exp_q.push_back('{"W", wa + ot * ti * 16, ti * 16});
      for (int p = 0; p < nv; p++) begin
        if (!(nv == 1 && loaded)) exp_q.push_back('{"X", ia + p * ti * 2, ti * 2});
        else n_skip++;
        loaded = 1;
        exp_q.push_back('{"S", 0, ti});
        ob++;
        if (ob == OUT_DEPTH || p == nv - 1) begin
          if (ob == OUT_DEPTH && p != nv - 1) n_flush_full++;
          exp_q.push_back('{"O", optr, ob * 2});
          optr += ob * 2; ob = 0;
        end
      end
    end
    cfg.n_vec = 16'(nv); cfg.n_in_tiles = 16'(ti); cfg.n_out_tiles = 16'(to);
    cfg.in_addr = maddr_t'(ia); cfg.w_addr = maddr_t'(wa); cfg.out_addr = maddr_t'(oa);
    cfg.m = radix_t'($urandom_range(0, 31)); cfg.n = radix_t'($urandom_range(0, 31));
    cfg.nl = nl_mode_e'($urandom_range(0, 1));
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (err) begin failures++; $display("FAIL err on a good descriptor"); end
    @(negedge clk);
    foreach (kinds[k]) begin
      ev_t g[$], e[$];
      g = got.find(x) with (x.kind == kinds[k]);
      e = exp_q.find(x) with (x.kind == kinds[k]);
      checks++;
      if (g.size() != e.size()) begin
        failures++; $display("FAIL %0d events of kind %s, expected %0d", g.size(), kinds[k], e.size());
      end
      for (int i = 0; i < e.size() && i < g.size(); i++) begin
        checks++;
        if (g[i] != e[i]) begin
          failures++;
          if (failures < 10) $display("FAIL event %0d: %s %0d %0d exp %s %0d %0d", i,
            g[i].kind, g[i].addr, g[i].len, e[i].kind, e[i].addr, e[i].len);
        end
      end
    end
  endtask

  initial begin
    cfg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_layer(1, 3, 2, 100, 2000, 9000);      // fully connected, input reused
    run_layer(10, 2, 2, 0, 5000, 7000);       // several vectors, full output buffer
    run_layer(4, 1, 1, 40, 60, 80);
    for (int r = 0; r < 20; r++)
      run_layer($urandom_range(1, 9), $urandom_range(1, 5), $urandom_range(1, 3),
                $urandom_range(0, 999), $urandom_range(0, 999), $urandom_range(0, 999));
    // refused descriptors
    for (int b = 0; b < 2; b++) begin
      cfg.n_vec = 1; cfg.n_out_tiles = 1;
      cfg.n_in_tiles = b ? 16'd0 : 16'd1025;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      checks++;
      if (!(done && err)) begin failures++; $display("FAIL bad descriptor not refused"); end
      @(negedge clk);
      checks++;
      if (busy) begin failures++; $display("FAIL busy after refusal"); end
    end
    checks++;
    if (n_flush_full == 0 || n_skip == 0 || n_overlap == 0) begin failures++; $display("FAIL flush/skip/overlap not exercised"); end
    $display("clocks with an input load overlapping streaming: %0d", n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
