// tb_alexnet_layers: runs layers with the shapes of the AlexNet ImageNet
// network through the accelerator at its default sizes, with random
// activations and random power-of-two weights. Each layer keeps its real
// fan-in (input tiles) and output width (output tiles); the convolutions
// are run for a few output positions only, to bound the simulation time:
//   conv1 11x11x3   = 363 inputs  (23 tiles), 96 outputs  (6 tiles), 20 positions
//   conv2 5x5x48    = 1200 inputs (75 tiles), 128 outputs (8 tiles), 4 positions
//                     (one of the two groups of AlexNet's conv2)
//   fc6   9216 inputs (576 tiles), 32 of its 4096 outputs (2 tiles)
//   fc8   4096 inputs (256 tiles), 1000 outputs (63 tiles, 8 unused)
// fc6 is the largest fan-in of the evaluated networks and fills 576 of the
// 1024 rows of an input bank and of the weights buffer. Every output is
// compared with a reference computed here, and the clocks of each layer are
// printed. Mechanisms counted: multi-tile accumulation, input reuse across
// output tiles, full-buffer flushes and ReLU clamping.
module tb_alexnet_layers;
  import mfdfp_pkg::*;
  import tb_ref_pkg::*;
  localparam int MW = 1 << 19;
  logic clk = 0, rst_n = 0;
  layer_cfg_t cfg;
  logic start = 0, busy, done, err;
  logic [N_NEURON-1:0] sat;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t mem_req;
  mword_t mem_rsp_data;
  int checks = 0, failures = 0, cycle = 0;
  // mechanism counters
  int c_multitile = 0, c_relu_clamp = 0, c_sat = 0, c_stall = 0, c_reuse = 0,
      c_flush_full = 0, c_nl_none = 0, c_nl_relu = 0, c_refused = 0;
  int n_reads = 0, n_bursts = 0;
  bit last_was_write = 0;

  mfdfp_accel dut (.*);
  ext_mem_model #(.WORDS(MW), .STALL_PCT(0), .LAT(2)) u_mem (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req(mem_req), .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) if (rst_n) begin
    if (|sat) c_sat++;
    if (mem_req_valid && mem_req_ready) begin
      if (mem_req.we && !last_was_write) n_bursts++;
      if (!mem_req.we) n_reads++;
      last_was_write <= mem_req.we;
    end
  end

  function automatic int get_x(int ia, int ti, int p, int i);
    mword_t wd = u_mem.mem[ia + p * ti * 2 + i / 8];
    return int'(signed'(wd[(i % 8) * 8 +: 8]));
  endfunction
  function automatic int get_w(int wa, int ti, int ot, int t, int j, int i);
    mword_t wd = u_mem.mem[wa + (ot * ti + t) * 16 + j];
    return int'(wd[i * 4 +: 4]);
  endfunction
  function automatic int get_y(int oa, int nv, int ot, int p, int j);
    mword_t wd = u_mem.mem[oa + (ot * nv + p) * 2 + j / 8];
    return int'(signed'(wd[(j % 8) * 8 +: 8]));
  endfunction

  task automatic fill_inputs(int ia, int words);
    for (int a = 0; a < words; a++) u_mem.mem[ia + a] = {$urandom, $urandom};
  endtask
  task automatic fill_weights(int wa, int words);
    for (int a = 0; a < words; a++) u_mem.mem[wa + a] = {$urandom, $urandom};
  endtask

  // Runs one layer whose inputs and weights are already in memory and
  // checks all its outputs.
  task automatic run_layer(int nv, int ti, int to, int ia, int wa, int oa,
                           int m, int n, bit relu, int used_outputs = 16);
    int ref_y [][][];
    int reads0 = n_reads, bursts0 = n_bursts, stalls0 = u_mem.n_stalls;
    int exp_reads, exp_bursts, t0;
    ref_y = new[to];
    foreach (ref_y[ot]) begin
      ref_y[ot] = new[nv];
      foreach (ref_y[ot][p]) begin
        ref_y[ot][p] = new[16];
        for (int j = 0; j < 16; j++) begin
          longint acc = 0;
          bit s;
          int v;
          for (int t = 0; t < ti; t++)
            for (int i = 0; i < 16; i++)
              acc += ref_prod(get_x(ia, ti, p, 16 * t + i), get_w(wa, ti, ot, t, j, i));
          v = ref_route(acc, m, n, s);
          if (relu && v < 0) c_relu_clamp++;
          ref_y[ot][p][j] = ref_nl(v, relu);
        end
      end
    end
    cfg.in_addr = maddr_t'(ia); cfg.w_addr = maddr_t'(wa); cfg.out_addr = maddr_t'(oa);
    cfg.n_vec = 16'(nv); cfg.n_in_tiles = 16'(ti); cfg.n_out_tiles = 16'(to);
    cfg.m = radix_t'(m); cfg.n = radix_t'(n); cfg.nl = relu ? NL_RELU : NL_NONE;
    @(negedge clk); start = 1; t0 = cycle; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (err) begin failures++; $display("FAIL layer refused"); end
    $display("layer nv=%0d ti=%0d to=%0d: %0d clocks", nv, ti, to, cycle - t0);
    @(negedge clk);
    for (int ot = 0; ot < to; ot++)
      for (int p = 0; p < nv; p++)
        for (int j = 0; j < used_outputs; j++) begin
          checks++;
          if (get_y(oa, nv, ot, p, j) != ref_y[ot][p][j]) begin
            failures++;
            if (failures < 10) $display("FAIL ot %0d p %0d j %0d: %0d exp %0d", ot, p, j,
                                        get_y(oa, nv, ot, p, j), ref_y[ot][p][j]);
          end
        end
    // memory traffic: weights once per output tile, inputs once per vector
    // and output tile (once in all for a single vector), one write burst per
    // output-buffer flush
    exp_reads  = to * ti * 16 + ((nv == 1) ? ti * 2 : to * nv * ti * 2);
    exp_bursts = to * ((nv + 15) / 16);
    checks++;
    if (n_reads - reads0 != exp_reads) begin failures++; $display("FAIL %0d reads, exp %0d", n_reads - reads0, exp_reads); end
    checks++;
    if (n_bursts - bursts0 != exp_bursts) begin failures++; $display("FAIL %0d write bursts, exp %0d", n_bursts - bursts0, exp_bursts); end
    if (ti > 1) c_multitile++;
    if (nv == 1 && to > 1) c_reuse++;
    if (nv > 16) c_flush_full += to * (nv / 16);
    if (relu) c_nl_relu++; else c_nl_none++;
    c_stall += u_mem.n_stalls - stalls0;
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    fill_inputs(0, 20 * 23 * 2);
    fill_weights(1000, 6 * 23 * 16);
    run_layer(20, 23, 6, 0, 1000, 4000, 6, 5, 1);           // conv1

    fill_inputs(10000, 4 * 75 * 2);
    fill_weights(11000, 8 * 75 * 16);
    run_layer(4, 75, 8, 10000, 11000, 21000, 5, 1, 1);      // conv2

    fill_inputs(30000, 576 * 2);
    fill_weights(32000, 2 * 576 * 16);
    run_layer(1, 576, 2, 30000, 32000, 51000, 3, -4, 1);    // fc6

    fill_inputs(60000, 256 * 2);
    fill_weights(61000, 63 * 256 * 16);
    run_layer(1, 256, 63, 60000, 61000, 330000, 3, -3, 0);  // fc8

    $display("mechanisms: multitile=%0d reuse=%0d full_flush=%0d relu_clamp=%0d",
      c_multitile, c_reuse, c_flush_full, c_relu_clamp);
    begin
      automatic int cnt [4] = '{c_multitile, c_reuse, c_flush_full, c_relu_clamp};
      foreach (cnt[k]) begin
        checks++;
        if (cnt[k] == 0) begin failures++; $display("FAIL mechanism %0d never happened", k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
