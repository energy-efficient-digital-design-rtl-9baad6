// tb_decay_multiplier: y must equal floor(u * coef / 256) for every 9-bit
// potential u and a set of coefficients including 0, 1.0 and the paper's
// beta = 0.9375 (240/256).
module tb_decay_multiplier;
  import tb_lif_ref_pkg::*;
  int checks = 0, failures = 0;
  logic signed [8:0] u, y;
  logic [8:0]        coef;
  int coefs [6] = '{0, 1, 128, 240, 255, 256};

  decay_multiplier dut (.u(u), .coef(coef), .y(y));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (coefs[c])
      for (int i = -256; i < 256; i++) begin
        u = 9'(i); coef = 9'(coefs[c]);
        #1;
        checks++;
        if (int'(y) != floor_div_pow2(i * coefs[c], 8)) begin
          failures++;
          if (failures < 10) $display("FAIL u=%0d coef=%0d y=%0d", i, coefs[c], y);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
