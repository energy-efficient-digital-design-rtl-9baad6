// tb_decay_lut: compares every LUT entry (dt = 0..127) with factors computed
// independently in real arithmetic: the multiplier coefficient
// round(beta^dt * 256) for beta = 240/256 and 128/256, and the shift code
// closest to (1 - 2^-n)^dt for n = 4 and n = 1.
module tb_decay_lut;
  import lif_pkg::*;
  import tb_lif_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [6:0]  dt;
  logic [8:0]  coef_m4, coef_m1, coef_s;
  shift_code_t code_m, code_s4, code_s1;

  decay_lut #(.DECAY(DECAY_MULT), .BETA_Q(240))  u_m4 (.dt(dt), .coef(coef_m4), .code(code_m));
  decay_lut #(.DECAY(DECAY_MULT), .BETA_Q(128))  u_m1 (.dt(dt), .coef(coef_m1), .code());
  decay_lut #(.DECAY(DECAY_SHIFT), .SHIFT_N(4))  u_s4 (.dt(dt), .coef(coef_s), .code(code_s4));
  decay_lut #(.DECAY(DECAY_SHIFT), .SHIFT_N(1))  u_s1 (.dt(dt), .coef(), .code(code_s1));

  function automatic int pack(shift_code_t c);
    return (c.keep ? 64 : 0) + (c.sub ? 16 : 0) + int'(c.k);
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 128; i++) begin
      dt = 7'(i);
      #1;
      checks += 4;
      if (int'(coef_m4) != ref_coef(240, 8, i)) begin failures++; $display("FAIL m4 dt=%0d got %0d exp %0d", i, coef_m4, ref_coef(240, 8, i)); end
      if (int'(coef_m1) != ref_coef(128, 8, i)) begin failures++; $display("FAIL m1 dt=%0d got %0d", i, coef_m1); end
      if (pack(code_s4) != ref_code(4, i)) begin failures++; $display("FAIL s4 dt=%0d got %0d exp %0d", i, pack(code_s4), ref_code(4, i)); end
      if (pack(code_s1) != ref_code(1, i)) begin failures++; $display("FAIL s1 dt=%0d got %0d exp %0d", i, pack(code_s1), ref_code(1, i)); end
    end
    // the unused output of each variant means "no decay"
    checks += 2;
    if (coef_s != 9'd256) failures++;
    if (!code_m.keep) failures++;
    // spot values worked out by hand: 0.9375^1 = 240/256, 0.9375^10 ~ 0.524 -> 1-2^-1 (sub,k=1)
    dt = 7'd1; #1; checks += 2;
    if (coef_m4 != 9'd240) failures++;
    if (pack(code_s4) != 16 + 4) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
