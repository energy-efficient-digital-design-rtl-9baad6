// tb_neuron_cu: checks the control sequences of the three modes.
// Serial (clock-driven and event-driven instances): a step with spikes must
// take exactly 1 + 8 cycles of busy time (step_ready low for 8 cycles), start
// with a decay+load+commit word, scan rom_addr 0..7 with add_en equal to the
// step's bits and fire on channel 7; an all-zero step takes 1 cycle and
// issues decay+fire (clock-driven) or only the idle count (event-driven).
// AER: each packet takes 2 cycles, and the second issues
// decay+add+fire+load+commit with rom_addr = packet address and dp_ts = its
// timestamp. In all modes out_valid follows the firing cycle by one clock and
// carries the spike flag given by the datapath.
module tb_neuron_cu;
  import lif_pkg::*;
  int checks = 0, failures = 0, cyc = 0;
  logic clk = 0, rst = 1;
  logic sv = 0, av = 0;
  logic [7:0] sx = 0;
  logic [2:0] aa = 0;
  logic [6:0] at = 0;
  logic dsp = 0;
  // clock-driven instance
  logic c_srdy, c_ardy, c_ov, c_so; dp_ctrl_t c_ctrl; logic [2:0] c_ra; logic [6:0] c_ts, c_ots;
  // event serial instance
  logic e_srdy, e_ardy, e_ov, e_so; dp_ctrl_t e_ctrl; logic [2:0] e_ra; logic [6:0] e_ts, e_ots;
  // AER instance
  logic a_srdy, a_ardy, a_ov, a_so; dp_ctrl_t a_ctrl; logic [2:0] a_ra; logic [6:0] a_ts, a_ots;

  neuron_cu #(.MODE(MODE_CLOCK_SERIAL)) u_c (.clk(clk), .rst(rst), .clr(1'b0),
    .step_valid(sv), .step_ready(c_srdy), .step_spikes(sx), .aer_valid(av), .aer_ready(c_ardy),
    .aer_addr(aa), .aer_ts(at), .ctrl(c_ctrl), .rom_addr(c_ra), .dp_ts(c_ts), .dp_spike(dsp),
    .out_valid(c_ov), .spike_out(c_so), .out_ts(c_ots));
  neuron_cu #(.MODE(MODE_EVENT_SERIAL)) u_e (.clk(clk), .rst(rst), .clr(1'b0),
    .step_valid(sv), .step_ready(e_srdy), .step_spikes(sx), .aer_valid(av), .aer_ready(e_ardy),
    .aer_addr(aa), .aer_ts(at), .ctrl(e_ctrl), .rom_addr(e_ra), .dp_ts(e_ts), .dp_spike(dsp),
    .out_valid(e_ov), .spike_out(e_so), .out_ts(e_ots));
  neuron_cu #(.MODE(MODE_EVENT_AER)) u_a (.clk(clk), .rst(rst), .clr(1'b0),
    .step_valid(sv), .step_ready(a_srdy), .step_spikes(sx), .aer_valid(av), .aer_ready(a_ardy),
    .aer_addr(aa), .aer_ts(at), .ctrl(a_ctrl), .rom_addr(a_ra), .dp_ts(a_ts), .dp_spike(dsp),
    .out_valid(a_ov), .spike_out(a_so), .out_ts(a_ots));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    wait (cyc > 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s at cycle %0d", what, cyc); end
  endtask

  initial begin
    @(posedge clk); #1 rst = 0;
    chk(!c_ardy && !e_ardy && !a_srdy, "unused port ready low");
    // ---------------- serial modes, both instances in lock step
    for (int s = 0; s < 60; s++) begin
      bit spk;
      sx  = (s % 3 == 0) ? 8'h00 : 8'($urandom_range(255));
      spk = ($urandom_range(1) == 0);
      sv  = 1; #1;
      chk(c_srdy && e_srdy, "serial ready in idle");
      if (sx == 0) begin
        chk(c_ctrl.decay_en && c_ctrl.fire_en && c_ctrl.load && !c_ctrl.add_en, "clock idle-step word");
        chk(!e_ctrl.decay_en && !e_ctrl.load && e_ctrl.dt_idle, "event idle-step word");
        dsp = spk;
        @(posedge clk); #1 sv = 0; dsp = 0;
        chk(c_ov && e_ov, "idle step reported next cycle");
        chk(c_so == spk && !e_so, "idle step spike flags");
        chk(c_ots == 7'(s) && e_ots == 7'(s), "step index");
      end else begin
        chk(c_ctrl.decay_en && c_ctrl.load && !c_ctrl.add_en && !c_ctrl.fire_en, "clock decay word");
        chk(e_ctrl.decay_en && e_ctrl.load && e_ctrl.dt_commit && !e_ctrl.fire_en, "event decay word");
        @(posedge clk); #1 sv = 0;
        for (int ch = 0; ch < 8; ch++) begin
          chk(!c_srdy && !e_srdy, "busy while scanning");
          chk(int'(c_ra) == ch && int'(e_ra) == ch, "scan address");
          chk(c_ctrl.add_en == sx[ch] && e_ctrl.add_en == sx[ch], "add_en follows bit");
          chk(c_ctrl.fire_en == (ch == 7) && e_ctrl.fire_en == (ch == 7), "fire on last channel");
          chk(!c_ctrl.decay_en && !e_ctrl.decay_en, "no decay while scanning");
          chk(!c_ov && !e_ov, "no report while scanning");
          if (ch == 7) dsp = spk;
          @(posedge clk); #1 dsp = 0;
        end
        chk(c_ov && e_ov && c_so == spk && e_so == spk, "active step reported with spike");
        chk(c_ots == 7'(s) && e_ots == 7'(s), "active step index");
      end
      sx = 0;
    end
    // ---------------- AER mode
    for (int p = 0; p < 60; p++) begin
      bit spk;
      aa  = 3'($urandom_range(7));
      at  = at + 7'($urandom_range(2));
      spk = ($urandom_range(1) == 0);
      av  = 1; #1;
      chk(a_ardy, "aer ready in idle");
      chk(a_ctrl == DP_NOP, "no datapath work while latching");
      @(posedge clk); #1;
      chk(!a_ardy, "aer busy in processing cycle");
      chk(a_ctrl.decay_en && a_ctrl.add_en && a_ctrl.fire_en && a_ctrl.load && a_ctrl.dt_commit, "aer process word");
      chk(a_ra == aa && a_ts == at, "aer address and timestamp");
      dsp = spk;
      av = ($urandom_range(1) == 0);  // packet held: must not be taken twice
      @(posedge clk); #1 dsp = 0;
      chk(a_ov && a_so == spk && a_ots == at, "aer report");
      av = 0;
      if ($urandom_range(1) == 0) begin @(posedge clk); #1; chk(!a_ov, "single report"); end
      else @(posedge clk);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
