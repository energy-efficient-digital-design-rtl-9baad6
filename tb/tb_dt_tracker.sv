// tb_dt_tracker: random idle/commit/timestamp sequences for the three modes.
// Event serial: dt counts idle steps since the last commit, starting at 1 and
// saturating at 127. AER: dt = ts - last committed ts (mod 128). Clock: dt = 1.
module tb_dt_tracker;
  import lif_pkg::*;
  int checks = 0, failures = 0, cyc = 0, saturated = 0;
  logic clk = 0, rst = 1, clr = 0, idle = 0, commit = 0;
  logic [6:0] ts = 0, dt_s, dt_a, dt_c;
  int m_cnt = 1, m_last = 0;

  dt_tracker #(.MODE(MODE_EVENT_SERIAL)) u_s (.clk(clk), .rst(rst), .clr(clr), .idle_step(idle), .commit(commit), .ts(ts), .dt(dt_s));
  dt_tracker #(.MODE(MODE_EVENT_AER))    u_a (.clk(clk), .rst(rst), .clr(clr), .idle_step(idle), .commit(commit), .ts(ts), .dt(dt_a));
  dt_tracker #(.MODE(MODE_CLOCK_SERIAL)) u_c (.clk(clk), .rst(rst), .clr(clr), .idle_step(idle), .commit(commit), .ts(ts), .dt(dt_c));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    wait (cyc > 5000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    checks += 3;
    if (int'(dt_s) != m_cnt) begin failures++; if (failures < 10) $display("FAIL serial dt=%0d exp=%0d", dt_s, m_cnt); end
    if (int'(dt_a) != ((int'(ts) - m_last) & 127)) begin failures++; if (failures < 10) $display("FAIL aer dt=%0d", dt_a); end
    if (dt_c != 7'd1) failures++;
  endtask

  initial begin
    @(posedge clk); #1 rst = 0;
    for (int i = 0; i < 2000; i++) begin
      // long idle runs now and then, to reach saturation
      idle   = (i > 300 && i < 500) ? 1'b1 : ($urandom_range(3) != 0);
      commit = (i > 300 && i < 500) ? 1'b0 : !idle && ($urandom_range(1) == 0);
      clr    = (i > 300 && i < 500) ? 1'b0 : ($urandom_range(199) == 0);
      if ($urandom_range(1) == 0) ts = ts + 7'($urandom_range(3));
      #1 check();
      @(posedge clk);
      if (clr) begin m_cnt = 1; m_last = 0; end
      else begin
        if (commit) begin m_cnt = 1; m_last = int'(ts); end
        else if (idle && m_cnt < 127) m_cnt++;
      end
      if (m_cnt == 127) saturated++;
      #1;
    end
    checks++;
    if (saturated == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
