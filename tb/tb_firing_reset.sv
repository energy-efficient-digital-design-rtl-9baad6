// tb_firing_reset: exhaustive over the 9-bit potential for both reset rules
// and two thresholds; spike iff u > VTH, and after a spike the potential is 0
// (zero reset) or u - VTH (subtract reset).
module tb_firing_reset;
  import lif_pkg::*;
  int checks = 0, failures = 0;
  logic signed [8:0] u, y_z, y_s, y_s2;
  logic              sp_z, sp_s, sp_s2;

  firing_reset #(.RESET(RESET_ZERO))             u_z  (.u(u), .spike(sp_z),  .y(y_z));
  firing_reset #(.RESET(RESET_SUB))              u_s  (.u(u), .spike(sp_s),  .y(y_s));
  firing_reset #(.RESET(RESET_SUB), .VTH(9'sd10)) u_s2 (.u(u), .spike(sp_s2), .y(y_s2));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = -256; i < 256; i++) begin
      u = 9'(i);
      #1;
      checks += 6;
      if (sp_z  != (i > 64)) failures++;
      if (sp_s  != (i > 64)) failures++;
      if (sp_s2 != (i > 10)) failures++;
      if (int'(y_z)  != ((i > 64) ? 0 : i))      failures++;
      if (int'(y_s)  != ((i > 64) ? i - 64 : i)) failures++;
      if (int'(y_s2) != ((i > 10) ? i - 10 : i)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
