// tb_sat_adder: exhaustive over all 9-bit potentials and 6-bit weights; the
// sum must equal a + w clamped to [-256, 255].
module tb_sat_adder;
  int checks = 0, failures = 0, sat_hi = 0, sat_lo = 0;
  logic signed [8:0] a, y;
  logic signed [5:0] w;
  int s;

  sat_adder dut (.a(a), .w(w), .y(y));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = -256; i < 256; i++)
      for (int j = -32; j < 32; j++) begin
        a = 9'(i); w = 6'(j);
        #1;
        s = i + j;
        if (s > 255) begin s = 255; sat_hi++; end
        if (s < -256) begin s = -256; sat_lo++; end
        checks++;
        if (int'(y) != s) begin
          failures++; if (failures < 10) $display("FAIL a=%0d w=%0d y=%0d", i, j, y); end
      end
    checks++;
    if (sat_hi == 0 || sat_lo == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
