// tb_nl_unit: exhaustive check of ReLU and pass-through on 8-bit values.
module tb_nl_unit;
  import mfdfp_pkg::*;
  import tb_ref_pkg::*;
  logic signed [7:0] x, y;
  nl_mode_e mode;
  int checks = 0, failures = 0;

  nl_unit dut (.x, .mode, .y);

  initial begin
    for (int r = 0; r < 2; r++) begin
      for (int v = -128; v < 128; v++) begin
        x = 8'(v); mode = r ? NL_RELU : NL_NONE;
        #1;
        checks++;
        if (int'(y) != ref_nl(v, r == 1)) begin
          failures++;
          $display("FAIL mode=%0d x=%0d y=%0d", r, v, y);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
