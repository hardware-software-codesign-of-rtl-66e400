// tb_npu: checks the NPU in its ensemble configuration (two processing
// units of 16 neurons). Both units take the same input tiles, each with its
// own weights; every one of the 32 outputs is compared with the reference,
// and the outputs must appear 2 clock edges after the last tile. Neuron
// groups are fed back to back at one tile per clock.
module tb_npu;
  import mfdfp_pkg::*;
  import tb_ref_pkg::*;
  localparam int NP = 2;
  logic clk = 0, rst_n = 0;
  logic valid = 0, first = 0, last = 0;
  act_t x [N_SYN];
  wcode_t w [NP][N_NEURON][N_SYN];
  radix_t m = '0, n = '0;
  nl_mode_e nl = NL_NONE;
  act_t y [NP][N_NEURON];
  logic y_valid;
  logic [NP*N_NEURON-1:0] sat;
  int checks = 0, failures = 0, cycle = 0;
  typedef struct { int y [NP][N_NEURON]; int at; } exp_t;
  exp_t q[$];

  npu #(.NUM_PU(NP)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) if (rst_n) begin : mon
    #2;
    if (y_valid) begin
      exp_t e;
      if (q.size() == 0) begin checks++; failures++; $display("FAIL unexpected output"); end
      else begin
        e = q.pop_front();
        checks++;
        if (cycle != e.at) begin failures++; $display("FAIL output at %0d exp %0d", cycle, e.at); end
        for (int u = 0; u < NP; u++)
          for (int j = 0; j < N_NEURON; j++) begin
            checks++;
            if (int'(y[u][j]) != e.y[u][j]) begin
              failures++;
              if (failures < 10) $display("FAIL pu %0d neuron %0d y=%0d exp %0d", u, j, y[u][j], e.y[u][j]);
            end
          end
      end
    end
  end

  initial begin
    foreach (x[i]) x[i] = '0;
    foreach (w[u, j, i]) w[u][j][i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 300; r++) begin
      automatic int k  = 1 + $urandom_range(0, 5);
      automatic int mm = rnd_radix(-4, 6);
      automatic int nn = mm + 7 - rnd_radix(5, 12);
      automatic bit relu = $urandom_range(0, 1);
      longint acc [NP][N_NEURON];
      exp_t e;
      bit s;
      foreach (acc[u, j]) acc[u][j] = 0;
      for (int t = 0; t < k; t++) begin
        valid = 1; first = (t == 0); last = (t == k - 1);
        m = radix_t'(mm); n = radix_t'(nn); nl = relu ? NL_RELU : NL_NONE;
        foreach (x[i]) x[i] = act_t'(rnd_act());
        foreach (w[u, j, i]) begin
          w[u][j][i] = wcode_t'($urandom_range(0, 15));
          acc[u][j] += ref_prod(int'(x[i]), int'(w[u][j][i]));
        end
        @(negedge clk);
      end
      foreach (acc[u, j]) e.y[u][j] = ref_nl(ref_route(acc[u][j], mm, nn, s), relu);
      e.at = cycle + 1;
      q.push_back(e);
      valid = 0; first = 0; last = 0;
      @(negedge clk);
    end
    repeat (5) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", q.size()); end
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
