// tb_neuron_dp: random control words, weights and timestamps drive two
// datapath variants (event serial / multiplier / zero reset and AER / shifter
// / subtract reset). After every clock edge the potential and the spike flag
// are compared with the reference model, which keeps its own elapsed-time
// state. Counts that decay, add, fire and both resets each happened.
module tb_neuron_dp;
  import lif_pkg::*;
  import tb_lif_ref_pkg::*;
  int checks = 0, failures = 0, cyc = 0, n_spk_a = 0, n_spk_b = 0;
  logic clk = 0, rst = 1, clr = 0;
  dp_ctrl_t ctrl;
  logic signed [5:0] w;
  logic [6:0] ts = 0;
  logic sp_a, sp_b;
  logic signed [8:0] u_a, u_b;
  int ma = 0, mb = 0, cnt_a = 1, last_b = 0;

  neuron_dp #(.MODE(MODE_EVENT_SERIAL), .DECAY(DECAY_MULT), .RESET(RESET_ZERO)) u_a_dp (
    .clk(clk), .rst(rst), .clr(clr), .ctrl(ctrl), .weight(w), .ts(ts), .spike(sp_a), .u_mem(u_a));
  neuron_dp #(.MODE(MODE_EVENT_AER), .DECAY(DECAY_SHIFT), .RESET(RESET_SUB)) u_b_dp (
    .clk(clk), .rst(rst), .clr(clr), .ctrl(ctrl), .weight(w), .ts(ts), .spike(sp_b), .u_mem(u_b));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    wait (cyc > 10000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one model step: returns next potential and spike
  function automatic int step(int u, int dt, int dk, int rk, dp_ctrl_t c, int wi, output bit spk);
    int v;
    spk = 0;
    v = u;
    if (c.decay_en) v = ref_decay(v, dt, dk, 240, 8, 4);
    if (c.add_en)   v = ref_sat(v + wi);
    if (c.fire_en)  v = ref_fire(v, 64, rk, spk);
    return v;
  endfunction

  initial begin
    bit ea, eb;
    int na, nb;
    ctrl = DP_NOP; w = 0;
    @(posedge clk); #1 rst = 0;
    for (int i = 0; i < 6000; i++) begin
      ctrl.decay_en  = ($urandom_range(3) == 0);
      ctrl.add_en    = ($urandom_range(1) == 0);
      ctrl.fire_en   = ($urandom_range(2) == 0);
      ctrl.load      = ($urandom_range(4) != 0);
      ctrl.dt_commit = ctrl.decay_en;
      ctrl.dt_idle   = !ctrl.dt_commit && ($urandom_range(1) == 0);
      w              = 6'($urandom_range(63));
      if ($urandom_range(3) == 0) ts = ts + 7'($urandom_range(5));
      clr            = ($urandom_range(299) == 0);
      #1;
      na = step(ma, cnt_a, 0, 0, ctrl, int'(w), ea);
      nb = step(mb, (int'(ts) - last_b) & 127, 1, 1, ctrl, int'(w), eb);
      checks += 2;
      if (sp_a != ea) begin failures++; if (failures < 10) $display("FAIL spike a i=%0d", i); end
      if (sp_b != eb) begin failures++; if (failures < 10) $display("FAIL spike b i=%0d", i); end
      n_spk_a += int'(ea); n_spk_b += int'(eb);
      @(posedge clk);
      if (clr) begin ma = 0; mb = 0; cnt_a = 1; last_b = 0; end
      else begin
        if (ctrl.load) begin ma = na; mb = nb; end
        if (ctrl.dt_commit) begin cnt_a = 1; last_b = int'(ts); end
        else if (ctrl.dt_idle && cnt_a < 127) cnt_a++;
      end
      #1;
      checks += 2;
      if (int'(u_a) != ma) begin failures++; if (failures < 10) $display("FAIL u_a i=%0d got %0d exp %0d", i, u_a, ma); end
      if (int'(u_b) != mb) begin failures++; if (failures < 10) $display("FAIL u_b i=%0d got %0d exp %0d", i, u_b, mb); end
    end
    checks++;
    if (n_spk_a == 0 || n_spk_b == 0) failures++;
    $display("spikes a=%0d b=%0d", n_spk_a, n_spk_b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
