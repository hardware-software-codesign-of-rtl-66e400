// tb_cifar10_net: runs the layer shapes of the CIFAR-10 benchmark network
// through the accelerator at its default sizes, with random activations and
// random power-of-two weights (no trained weights are used).
//
//   conv1 5x5, 3 -> 32 channels, 32x32 positions (fan-in 75 -> 5 tiles)
//   pool  2x2 max                  -> 16x16       (host)
//   conv2 5x5, 32 -> 32, 16x16     (fan-in 800 -> 50 tiles)
//   pool  2x2 max                  -> 8x8         (host)
//   conv3 5x5, 32 -> 64, 8x8       (fan-in 800 -> 50 tiles, 4 output tiles)
//   pool  2x2 max                  -> 4x4         (host)
//   ip1   1024 -> 10               (64 tiles, 1 output tile)
//
// The host steps (zero padding, arranging each 5x5 window into an input
// vector, pooling) are done by this testbench, as they are outside the
// accelerator. Each convolution's reference is computed directly from the
// activation tensor, not from the arranged vectors, and every output of
// every layer is compared. The clock count of each layer is printed.
module tb_cifar10_net;
  import mfdfp_pkg::*;
  import tb_ref_pkg::*;
  localparam int MW = 65536, IA = 0, WA = 30000, OA = 40000;
  logic clk = 0, rst_n = 0;
  layer_cfg_t cfg;
  logic start = 0, busy, done, err;
  logic [N_NEURON-1:0] sat;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t mem_req;
  mword_t mem_rsp_data;
  int checks = 0, failures = 0, cycle = 0, total_clocks = 0;

  mfdfp_accel dut (.*);
  ext_mem_model #(.WORDS(MW), .STALL_PCT(0), .LAT(2)) u_mem (.clk, .rst_n,
    .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // activation tensor [channel][y][x], 8-bit values
  int act [64][32][32];
  int nxt [64][32][32];
  int wcode [64][1024];

  function automatic void put_byte(int word, int lane, int v);
    u_mem.mem[word][lane * 8 +: 8] = 8'(v);
  endfunction
  function automatic int get_byte(int word, int lane);
    return int'(signed'(u_mem.mem[word][lane * 8 +: 8]));
  endfunction

  // Convolution (K=5, pad 2) or fully connected (K=0) layer.
  task automatic layer(string name, int cin, int hw, int cout, int k, int m, int n, bit relu);
    int fan  = (k == 0) ? cin * hw * hw : cin * k * k;
    int ti   = (fan + 15) / 16;
    int to   = (cout + 15) / 16;
    int nv   = (k == 0) ? 1 : hw * hw;
    int t0, nsat = 0;
    // weights: codes for output o, input index i (i < fan), zero-input padding
    for (int o = 0; o < to * 16; o++)
      for (int i = 0; i < ti * 16; i++) wcode[o % 64][i] = $urandom_range(0, 15);
    for (int ot = 0; ot < to; ot++)
      for (int t = 0; t < ti; t++)
        for (int j = 0; j < 16; j++)
          for (int i = 0; i < 16; i++)
            u_mem.mem[WA + (ot * ti + t) * 16 + j][i * 4 +: 4] = 4'(wcode[(ot * 16 + j) % 64][t * 16 + i]);
    // input vectors: element i = (ky*K + kx)*cin + c, or c*hw*hw + y*hw + x
    for (int p = 0; p < nv; p++) begin
      int py = p / hw, px = p % hw;
      for (int i = 0; i < ti * 16; i++) begin
        int v = 0;
        if (i < fan) begin
          if (k == 0) v = act[i / (hw * hw)][(i / hw) % hw][i % hw];
          else begin
            int c = i % cin, kk = i / cin, yy = py + kk / k - 2, xx = px + kk % k - 2;
            v = (yy < 0 || yy >= hw || xx < 0 || xx >= hw) ? 0 : act[c][yy][xx];
          end
        end
        put_byte(IA + (p * ti + i / 16) * 2 + (i % 16) / 8, i % 8, v);
      end
    end
    cfg.in_addr = IA; cfg.w_addr = WA; cfg.out_addr = OA;
    cfg.n_vec = 16'(nv); cfg.n_in_tiles = 16'(ti); cfg.n_out_tiles = 16'(to);
    cfg.m = radix_t'(m); cfg.n = radix_t'(n); cfg.nl = relu ? NL_RELU : NL_NONE;
    @(negedge clk); start = 1; t0 = cycle; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    total_clocks += cycle - t0;
    $display("%s: %0d vectors x %0d input tiles x %0d output tiles, %0d clocks", name, nv, ti, to, cycle - t0);
    checks++;
    if (err) begin failures++; $display("FAIL %s refused", name); end
    // reference, directly from the tensor
    for (int o = 0; o < cout; o++)
      for (int p = 0; p < nv; p++) begin
        longint acc = 0;
        bit s;
        int py = p / hw, px = p % hw, r, got;
        if (k == 0) begin
          for (int c = 0; c < cin; c++)
            for (int yy = 0; yy < hw; yy++)
              for (int xx = 0; xx < hw; xx++)
                acc += ref_prod(act[c][yy][xx], wcode[o % 64][c * hw * hw + yy * hw + xx]);
        end else begin
          for (int ky = 0; ky < k; ky++)
            for (int kx = 0; kx < k; kx++)
              for (int c = 0; c < cin; c++) begin
                int yy = py + ky - 2, xx = px + kx - 2;
                if (yy >= 0 && yy < hw && xx >= 0 && xx < hw)
                  acc += ref_prod(act[c][yy][xx], wcode[o % 64][(ky * k + kx) * cin + c]);
              end
        end
        r = ref_nl(ref_route(acc, m, n, s), relu);
        got = get_byte(OA + ((o / 16) * nv + p) * 2 + (o % 16) / 8, o % 8);
        checks++;
        if (got != r) begin
          failures++;
          if (failures < 10) $display("FAIL %s out %0d pos %0d: %0d exp %0d", name, o, p, got, r);
        end
        nxt[o][py][px] = got;
        if (s) nsat++;
      end
    $display("%s: %0d of %0d outputs saturated", name, nsat, cout * nv);
  endtask

  // host: 2x2 max pooling of nxt into act
  task automatic pool(int ch, int hw);
    for (int c = 0; c < ch; c++)
      for (int y = 0; y < hw / 2; y++)
        for (int x = 0; x < hw / 2; x++) begin
          int v = nxt[c][2*y][2*x];
          if (nxt[c][2*y][2*x+1] > v) v = nxt[c][2*y][2*x+1];
          if (nxt[c][2*y+1][2*x] > v) v = nxt[c][2*y+1][2*x];
          if (nxt[c][2*y+1][2*x+1] > v) v = nxt[c][2*y+1][2*x+1];
          act[c][y][x] = v;
        end
  endtask

  initial begin
    int best = 0;
    cfg = '0;
    for (int c = 0; c < 3; c++)
      for (int y = 0; y < 32; y++)
        for (int x = 0; x < 32; x++) act[c][y][x] = rnd_act();
    repeat (3) @(negedge clk);
    rst_n = 1;
    layer("conv1", 3, 32, 32, 5, 7, 5, 1);  pool(32, 32);
    layer("conv2", 32, 16, 32, 5, 5, 1, 1); pool(32, 16);
    layer("conv3", 32, 8, 64, 5, 1, -3, 1);  pool(64, 8);
    layer("ip1",   64, 4, 10, 0, -3, -7, 0);
    for (int o = 1; o < 10; o++) if (nxt[o][0][0] > nxt[best][0][0]) best = o;
    $display("network: %0d clocks in all; class %0d has the largest logit", total_clocks, best);
    for (int o = 0; o < 10; o++) $write("%0d ", nxt[o][0][0]);
    $display("");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
