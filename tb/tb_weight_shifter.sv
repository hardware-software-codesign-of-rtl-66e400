// tb_weight_shifter: exhaustive check of the synapse shifter.
// Every 8-bit activation is combined with every 4-bit weight code and the
// 16-bit product is compared with x * (+/-2^-k) * 2^7 computed by
// multiplication and division.
module tb_weight_shifter;
  import mfdfp_pkg::*;
  import tb_ref_pkg::*;
  act_t x; wcode_t w; prod_t p;
  int checks = 0, failures = 0;

  weight_shifter dut (.x, .w, .p);

  initial begin
    for (int xi = -128; xi < 128; xi++) begin
      for (int wi = 0; wi < 16; wi++) begin
        x = act_t'(xi); w = wcode_t'(wi);
        #1;
        checks++;
        if (longint'(p) != ref_prod(xi, wi)) begin
          failures++;
          if (failures < 10) $display("FAIL x=%0d w=%0d p=%0d exp=%0d", xi, wi, p, ref_prod(xi, wi));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
