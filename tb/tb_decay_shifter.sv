// tb_decay_shifter: for every 9-bit potential and every shift code (keep,
// u >>> k, u - (u >>> k), k = 0..15), y must match floor division by 2^k.
module tb_decay_shifter;
  import lif_pkg::*;
  import tb_lif_ref_pkg::*;
  int checks = 0, failures = 0;
  logic signed [8:0] u, y;
  shift_code_t       code;
  int exp;

  decay_shifter dut (.u(u), .code(code), .y(y));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < 3; m++)
      for (int k = 0; k < 16; k++)
        for (int i = -256; i < 256; i += 3) begin
          u = 9'(i);
          code = '{keep: (m == 2), sub: (m == 1), k: 4'(k)};
          #1;
          if (m == 2)      exp = i;
          else if (m == 1) exp = i - floor_div_pow2(i, k);
          else             exp = floor_div_pow2(i, k);
          checks++;
          if (int'(y) != exp) begin
            failures++;
            if (failures < 10) $display("FAIL m=%0d k=%0d u=%0d y=%0d exp=%0d", m, k, i, y, exp);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
