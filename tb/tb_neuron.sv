// tb_neuron: end-to-end check of one neuron: random activations and weight
// codes over 1..6 input tiles, random radix indices and NL mode. Neurons are
// fed back to back (one tile per clock, the next neuron's first tile right
// after the previous last tile) and with idle gaps. Each output must appear
// exactly 2 clock edges after its last tile is taken.
module tb_neuron;
  import mfdfp_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic valid = 0, first = 0, last = 0;
  act_t x [N_SYN];
  wcode_t w [N_SYN];
  radix_t m = '0, n = '0;
  nl_mode_e nl = NL_NONE;
  act_t y; logic y_valid, sat;
  int checks = 0, failures = 0, cycle = 0;
  typedef struct { int y; int at; } exp_t;
  exp_t q[$];

  neuron dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) if (rst_n) begin #2; if (y_valid) begin : mon
    exp_t e;
    checks++;
    if (q.size() == 0) begin failures++; $display("FAIL unexpected output"); end
    else begin
      e = q.pop_front();
      if (int'(y) != e.y || cycle != e.at) begin
        failures++;
        if (failures < 10) $display("FAIL y=%0d at %0d exp %0d at %0d", y, cycle, e.y, e.at);
      end
    end
  end
  end

  initial begin
    foreach (x[i]) begin x[i] = '0; w[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 1500; r++) begin
      automatic int k = 1 + $urandom_range(0, 5);
      automatic int mm = rnd_radix(-4, 6);
      automatic int nn = mm + 7 - rnd_radix(5, 12);
      automatic bit relu = $urandom_range(0, 1);
      automatic longint acc = 0;
      bit s;
      exp_t e;
      for (int t = 0; t < k; t++) begin
        if ($urandom_range(0, 4) == 0) begin valid = 0; @(negedge clk); end
        valid = 1; first = (t == 0); last = (t == k - 1);
        m = radix_t'(mm); n = radix_t'(nn); nl = relu ? NL_RELU : NL_NONE;
        foreach (x[i]) begin
          x[i] = act_t'(rnd_act());
          w[i] = wcode_t'($urandom_range(0, 15));
          acc += ref_prod(int'(x[i]), int'(w[i]));
        end
        @(negedge clk);
      end
      e.y = ref_nl(ref_route(acc, mm, nn, s), relu);
      e.at = cycle + 1;       // last tile taken at edge cycle, output 2 edges later
      q.push_back(e);
      valid = 0; first = 0; last = 0;
      // keep m, n, nl steady until this neuron's output is out
      if ($urandom_range(0, 1)) begin @(negedge clk); @(negedge clk); end
      else begin
        // back to back: the next neuron may change m/n/nl only after the
        // output register is loaded, so hold one more clock here
        @(negedge clk);
      end
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
