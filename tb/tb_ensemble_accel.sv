// tb_ensemble_accel: end-to-end test of the ensemble configuration, the
// accelerator with two processing units (NUM_PU = 2), each running its own
// network on the same inputs. Buffers keep their default depths.
//
// Both networks' power-of-two weights are interleaved in memory as the
// weights buffer expects (one 2048-bit row per input tile: unit 0's 256
// weights, then unit 1's), and each output row holds 16 outputs of unit 0
// followed by 16 of unit 1. Every output of both units is compared with a
// reference computed here. Layers: a fully connected layer chained into a
// second one, a convolution-like layer that overflows the output buffer,
// and the 1024-input CIFAR-10 classifier layer, whose two logit vectors are
// then combined as the ensemble does (mean of the logits, then the largest)
// by this testbench, which stands for the host. Counted mechanisms:
// multi-tile accumulation, input reuse, full-buffer flushes, memory stalls
// and the two units disagreeing (they hold different networks).
module tb_ensemble_accel;
  import mfdfp_pkg::*;
  import tb_ref_pkg::*;
  localparam int MW = 65536;
  localparam int NP = 2;
  logic clk = 0, rst_n = 0;
  layer_cfg_t cfg;
  logic start = 0, busy, done, err;
  logic [NP*N_NEURON-1:0] sat;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t mem_req;
  mword_t mem_rsp_data;
  int checks = 0, failures = 0, cycle = 0;
  // mechanism counters
  int c_multitile = 0, c_stall = 0, c_reuse = 0, c_flush_full = 0, c_differ = 0;
  int n_reads = 0, n_bursts = 0;
  bit last_was_write = 0;

  mfdfp_accel #(.NUM_PU(NP)) dut (.*);
  ext_mem_model #(.WORDS(MW)) u_mem (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req(mem_req), .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) if (rst_n) begin
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
  function automatic int get_w(int wa, int ti, int ot, int t, int u, int j, int i);
    mword_t wd = u_mem.mem[wa + (ot * ti + t) * 16 * NP + u * 16 + j];
    return int'(wd[i * 4 +: 4]);
  endfunction
  function automatic int get_y(int oa, int nv, int ot, int p, int u, int j);
    mword_t wd = u_mem.mem[oa + (ot * nv + p) * 2 * NP + (u * 16 + j) / 8];
    return int'(signed'(wd[(j % 8) * 8 +: 8]));
  endfunction

  task automatic fill_inputs(int ia, int words);
    for (int a = 0; a < words; a++) u_mem.mem[ia + a] = {$urandom, $urandom};
  endtask
  task automatic fill_weights(int wa, int words);
    for (int a = 0; a < words; a++) u_mem.mem[wa + a] = {$urandom, $urandom};
  endtask

  // Runs one layer whose inputs and weights are already in memory and
  // checks all outputs of both units.
  task automatic run_layer(int nv, int ti, int to, int ia, int wa, int oa,
                           int m, int n, bit relu, int used_outputs = 16);
    int ref_y [][][][];
    int reads0 = n_reads, bursts0 = n_bursts, stalls0 = u_mem.n_stalls;
    int exp_reads, exp_bursts, t0;
    bit differ = 0;
    ref_y = new[to];
    foreach (ref_y[ot]) begin
      ref_y[ot] = new[nv];
      foreach (ref_y[ot][p]) begin
        ref_y[ot][p] = new[NP];
        for (int u = 0; u < NP; u++) begin
          ref_y[ot][p][u] = new[16];
          for (int j = 0; j < 16; j++) begin
            longint acc = 0;
            bit s;
            int v;
            for (int t = 0; t < ti; t++)
              for (int i = 0; i < 16; i++)
                acc += ref_prod(get_x(ia, ti, p, 16 * t + i), get_w(wa, ti, ot, t, u, j, i));
            v = ref_route(acc, m, n, s);
            ref_y[ot][p][u][j] = ref_nl(v, relu);
          end
        end
        for (int j = 0; j < used_outputs; j++)
          if (ref_y[ot][p][0][j] != ref_y[ot][p][1][j]) differ = 1;
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
        for (int u = 0; u < NP; u++)
          for (int j = 0; j < used_outputs; j++) begin
            checks++;
            if (get_y(oa, nv, ot, p, u, j) != ref_y[ot][p][u][j]) begin
              failures++;
              if (failures < 10) $display("FAIL ot %0d p %0d unit %0d j %0d: %0d exp %0d", ot, p, u, j,
                                          get_y(oa, nv, ot, p, u, j), ref_y[ot][p][u][j]);
            end
          end
    // weights of both units once per output tile, inputs as with one unit,
    // one write burst per output-buffer flush
    exp_reads  = to * ti * 16 * NP + ((nv == 1) ? ti * 2 : to * nv * ti * 2);
    exp_bursts = to * ((nv + 15) / 16);
    checks++;
    if (n_reads - reads0 != exp_reads) begin failures++; $display("FAIL %0d reads, exp %0d", n_reads - reads0, exp_reads); end
    checks++;
    if (n_bursts - bursts0 != exp_bursts) begin failures++; $display("FAIL %0d write bursts, exp %0d", n_bursts - bursts0, exp_bursts); end
    if (ti > 1) c_multitile++;
    if (nv == 1 && to > 1) c_reuse++;
    if (nv > 16) c_flush_full += to * (nv / 16);
    if (differ) c_differ++;
    c_stall += u_mem.n_stalls - stalls0;
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1. fully connected 64 -> 32 with ReLU, then 32 -> 16 on the output row
    //    of both units (a vector of 32 activations)
    fill_inputs(0, 4 * 2);
    fill_weights(1000, 2 * 4 * 16 * NP);
    run_layer(1, 4, 2, 0, 1000, 3000, 0, 9, 1);
    fill_weights(4000, 1 * 2 * 16 * NP);
    run_layer(1, 2, 1, 3000, 4000, 5000, 9, 2, 0);

    // 2. convolution-like: 37 vectors of 48 inputs, 2 output tiles
    fill_inputs(6000, 37 * 3 * 2);
    fill_weights(7000, 2 * 3 * 16 * NP);
    run_layer(37, 3, 2, 6000, 7000, 8000, 3, 0, 0);

    // 3. CIFAR-10 classifier layer of both networks, then the ensemble vote
    fill_inputs(10000, 64 * 2);
    fill_weights(12000, 64 * 16 * NP);
    run_layer(1, 64, 1, 10000, 12000, 15000, 4, 1, 0, 10);
    begin
      automatic int best = 0, best_sum = -1000;
      for (int j = 0; j < 10; j++) begin
        automatic int s = get_y(15000, 1, 0, 0, 0, j) + get_y(15000, 1, 0, 0, 1, j);
        if (s > best_sum) begin best_sum = s; best = j; end
      end
      $display("ensemble class %0d (mean logit %0d/2)", best, best_sum);
    end

    $display("mechanisms: multitile=%0d reuse=%0d full_flush=%0d stalls=%0d units_differ=%0d",
      c_multitile, c_reuse, c_flush_full, c_stall, c_differ);
    begin
      automatic int cnt [5] = '{c_multitile, c_reuse, c_flush_full, c_stall, c_differ};
      foreach (cnt[k]) begin
        checks++;
        if (cnt[k] == 0) begin failures++; $display("FAIL mechanism %0d never happened", k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
