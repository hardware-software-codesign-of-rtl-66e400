// tb_mfdfp_accel: end-to-end test of the accelerator at its default sizes
// (one processing unit, two 1024-row input banks, 1024-row weights buffer,
// two 16-row output banks) against the external memory model with random
// back-pressure.
//
// Each layer's inputs and power-of-two weights are written into memory, the
// layer descriptor is started, and after `done` every output word in memory
// is compared with a reference computed here by integer arithmetic. Layers:
//   - a fully connected layer whose output feeds the next layer (chaining,
//     input vector reused across output tiles, ReLU);
//   - a convolution-like layer with more vectors than the output buffer
//     holds (flushes on a full buffer), no NL, a radix change;
//   - a layer whose outputs saturate;
//   - the classifier layer of the CIFAR-10 network (1024 inputs, 10 of 16
//     outputs used), 64 input tiles accumulated per neuron;
//   - a refused descriptor.
// Every mechanism is counted and a failure is counted for any that never
// happened: multi-tile accumulation, ReLU clamping, saturation, memory
// stalls, input reuse, full-buffer flushes, both NL modes, refusal.
module tb_mfdfp_accel;
  import mfdfp_pkg::*;
  import tb_ref_pkg::*;
  localparam int MW = 65536;
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
  ext_mem_model #(.WORDS(MW)) u_mem (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
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

    // 1. fully connected 64 -> 32 with ReLU, then 32 -> 16 on its output
    fill_inputs(0, 4 * 2);
    fill_weights(1000, 2 * 4 * 16);
    run_layer(1, 4, 2, 0, 1000, 3000, 0, 9, 1);
    fill_weights(4000, 1 * 2 * 16);
    run_layer(1, 2, 1, 3000, 4000, 5000, 9, 2, 0);

    // 2. convolution-like: 37 vectors of 48 inputs, 2 output tiles
    fill_inputs(6000, 37 * 3 * 2);
    fill_weights(7000, 2 * 3 * 16);
    run_layer(37, 3, 2, 6000, 7000, 8000, 3, 0, 0);

    // 3. saturating layer
    fill_inputs(9000, 2 * 2);
    fill_weights(9100, 2 * 16);
    run_layer(2, 2, 1, 9000, 9100, 9200, 2, 8, 1);

    // 4. CIFAR-10 classifier layer: 1024 inputs (64 tiles), 10 outputs
    fill_inputs(10000, 64 * 2);
    fill_weights(12000, 64 * 16);
    run_layer(1, 64, 1, 10000, 12000, 14000, 4, 1, 0, 10);

    // 5. refused descriptor: more input tiles than the buffers hold
    cfg.n_in_tiles = 16'd1025; cfg.n_vec = 1; cfg.n_out_tiles = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    checks++;
    if (done && err) c_refused++;
    else begin failures++; $display("FAIL descriptor not refused"); end

    $display("mechanisms: multitile=%0d relu_clamp=%0d saturated_rows=%0d stalls=%0d reuse=%0d full_flush=%0d nl_none=%0d nl_relu=%0d refused=%0d",
      c_multitile, c_relu_clamp, c_sat, c_stall, c_reuse, c_flush_full, c_nl_none, c_nl_relu, c_refused);
    begin
      automatic int cnt [9] = '{c_multitile, c_relu_clamp, c_sat, c_stall, c_reuse, c_flush_full, c_nl_none, c_nl_relu, c_refused};
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
