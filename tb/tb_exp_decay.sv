// tb_exp_decay: both decay units behind the LUT. For random potentials and
// every dt the output must match the real-arithmetic reference (multiplier:
// floor(u * round(beta^dt * 256) / 256); shifter: nearest power-of-two form).
// Also checks by hand that dt = 0 leaves u unchanged and that the clock-driven
// step (dt = 1) of the shifter is u - (u >>> 4).
module tb_exp_decay;
  import lif_pkg::*;
  import tb_lif_ref_pkg::*;
  int checks = 0, failures = 0;
  logic signed [8:0] u, y_m, y_s;
  logic [6:0]        dt;

  exp_decay #(.DECAY(DECAY_MULT))  u_m (.u(u), .dt(dt), .y(y_m));
  exp_decay #(.DECAY(DECAY_SHIFT)) u_s (.u(u), .dt(dt), .y(y_s));

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int d = 0; d < 128; d++)
      for (int r = 0; r < 16; r++) begin
        int ui;
        ui = int'($urandom_range(511)) - 256;
        u = 9'(ui); dt = 7'(d);
        #1;
        checks += 2;
        if (int'(y_m) != ref_decay(ui, d, 0, 240, 8, 4)) begin
          failures++; if (failures < 10) $display("FAIL mult u=%0d dt=%0d y=%0d", ui, d, y_m); end
        if (int'(y_s) != ref_decay(ui, d, 1, 240, 8, 4)) begin
          failures++; if (failures < 10) $display("FAIL shift u=%0d dt=%0d y=%0d", ui, d, y_s); end
      end
    u = 9'sd100; dt = 0; #1; checks += 2;
    if (y_m != 9'sd100 || y_s != 9'sd100) failures += 2;
    u = 9'sd100; dt = 1; #1; checks += 2;
    if (y_s != 9'sd94) failures++;   // 100 - 6
    if (y_m != 9'sd93) failures++;   // floor(93.75)
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
