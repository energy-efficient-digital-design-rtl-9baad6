// tb_lif_sweep: the latency sweep of the variant comparison, run on all six
// input/decay variants side by side. Each sample is 100 time steps of 8
// channels with a given temporal density (5 % to 100 % of the steps carry
// spikes, in steps of 5 %) and input density (25, 50, 75 or 100 % of the
// channels of such a step). The serial variants take one step per handshake,
// the AER variants one packet per set bit; all are driven back to back.
// Checked for every sample and variant: every report against the reference
// model, and the total latency against the cycle budget (serial: 1 cycle per
// all-zero step + 9 per active step; AER: 2 per packet). The sweep also checks
// the trend the comparison is about: the AER latency over the clock-driven
// latency, R, is below 1 for every sparse sample (temporal density 5 %) and
// reaches or exceeds 1 for dense ones. A table of latencies (ns at 100 MHz)
// and of R is printed.
module tb_lif_sweep;
  import lif_pkg::*;
  import tb_lif_ref_pkg::*;

  localparam int NV = 6;
  localparam int NS = 80;      // 4 input densities x 20 temporal densities
  localparam int MODES  [NV] = '{0, 0, 1, 1, 2, 2};
  localparam int DECAYS [NV] = '{0, 1, 0, 1, 0, 1};
  localparam int WTS    [8]  = '{12, -5, 20, 7, -9, 31, 3, 15};

  int checks = 0, failures = 0, cyc = 0, done_cnt = 0;
  int n_below = 0, n_above = 0;
  logic clk = 0, rst = 1;
  logic [7:0] stim [NS][100];
  int lat [NV][NS];
  bit stim_ready = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    wait (cyc > 2000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  initial begin
    for (int s = 0; s < NS; s++) begin
      int id, td, nact;
      id = s / 20 + 1; td = 5 * (s % 20 + 1);
      for (int t = 0; t < 100; t++) stim[s][t] = 0;
      nact = 0;
      while (nact < td) begin
        int t, n;
        t = int'($urandom_range(99));
        if (stim[s][t] == 0) begin
          n = 0;
          while (n < 2 * id) begin
            int c;
            c = int'($urandom_range(7));
            if (!stim[s][t][c]) begin stim[s][t][c] = 1'b1; n++; end
          end
          nact++;
        end
      end
    end
    stim_ready = 1;
  end

  for (genvar v = 0; v < NV; v++) begin : g_v
    localparam mode_e  M = mode_e'(MODES[v]);
    localparam decay_e D = decay_e'(DECAYS[v]);

    logic clr = 0, sv = 0, av = 0, srdy, ardy, ov, so;
    logic [7:0] sx = 0;
    logic [2:0] aa = 0;
    logic [6:0] at = 0, ots;
    logic signed [8:0] um;
    bit exp_spk [$]; int exp_u [$];
    int first_acc, last_rep;

    lif_neuron #(.MODE(M), .DECAY(D)) dut (
      .clk(clk), .rst(rst), .clr(clr),
      .step_valid(sv), .step_ready(srdy), .step_spikes(sx),
      .aer_valid(av), .aer_ready(ardy), .aer_addr(aa), .aer_ts(at),
      .out_valid(ov), .spike_out(so), .out_ts(ots), .u_mem(um));

    always @(posedge clk) if (!rst && ov) begin
      last_rep = cyc;
      if (exp_spk.size() == 0) chk(0, $sformatf("v%0d unexpected report", v));
      else begin
        bit es; int eu;
        es = exp_spk.pop_front(); eu = exp_u.pop_front();
        chk(so == es && int'(um) == eu, $sformatf("v%0d result", v));
      end
    end

    initial begin
      wait (stim_ready);
      wait (rst == 0);
      @(posedge clk); #1;
      for (int s = 0; s < NS; s++) begin
        int u, cnt, last, budget;
        bit spk;
        u = 0; cnt = 1; last = 0; budget = 0;
        for (int t = 0; t < 100; t++) begin
          if (M == MODE_EVENT_AER) begin
            for (int c = 0; c < 8; c++) if (stim[s][t][c]) begin
              u = ref_decay(u, t - last, DECAYS[v], 240, 8, 4);
              u = ref_fire(ref_sat(u + WTS[c]), 64, 1, spk);
              last = t; budget += 2;
              exp_spk.push_back(spk); exp_u.push_back(u);
            end
          end else begin
            if (stim[s][t] == 0 && M == MODE_EVENT_SERIAL) begin
              if (cnt < 127) cnt++;
              spk = 0;
            end else begin
              u = ref_decay(u, (M == MODE_EVENT_SERIAL) ? cnt : 1, DECAYS[v], 240, 8, 4);
              cnt = 1;
              for (int c = 0; c < 8; c++) if (stim[s][t][c]) u = ref_sat(u + WTS[c]);
              u = ref_fire(u, 64, 1, spk);
            end
            budget += (stim[s][t] == 0) ? 1 : 9;
            exp_spk.push_back(spk); exp_u.push_back(u);
          end
        end
        clr = 1; @(posedge clk); #1 clr = 0;
        first_acc = -1;
        for (int t = 0; t < 100; t++) begin
          if (M == MODE_EVENT_AER) begin
            for (int c = 0; c < 8; c++) if (stim[s][t][c]) begin
              av = 1; aa = 3'(c); at = 7'(t);
              do begin #1; @(posedge clk); end while (!ardy);
              if (first_acc < 0) first_acc = cyc;
              #1;
            end
          end else begin
            sv = 1; sx = stim[s][t];
            do begin #1; @(posedge clk); end while (!srdy);
            if (first_acc < 0) first_acc = cyc;
            #1;
          end
        end
        sv = 0; av = 0;
        wait (exp_spk.size() == 0);
        lat[v][s] = last_rep - first_acc - 1;
        chk(lat[v][s] == budget, $sformatf("v%0d sample %0d latency %0d budget %0d", v, s, lat[v][s], budget));
        @(posedge clk); #1;
      end
      done_cnt++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst = 0;
    wait (done_cnt == NV);
    $display("latency in ns (100 MHz); R = AER multiplier / clock-driven multiplier");
    $display("in.dens temp.dens  clk-mul clk-sh ev-ser-mul ev-ser-sh aer-mul aer-sh     R");
    for (int s = 0; s < NS; s++) begin
      real r;
      r = real'(lat[4][s]) / real'(lat[0][s]);
      if (s % 20 == 0 || s % 20 == 3 || s % 20 == 18 || s % 20 == 19)
        $display("  %3d%%     %3d%%   %6d %6d   %6d    %6d  %6d %6d  %5.2f", 25 * (s / 20 + 1),
                 5 * (s % 20 + 1), 10 * lat[0][s], 10 * lat[1][s], 10 * lat[2][s],
                 10 * lat[3][s], 10 * lat[4][s], 10 * lat[5][s], r);
      if (s % 20 == 0) begin chk(r < 1.0, "R below 1 for sparse input"); n_below++; end
      if (r >= 1.0) n_above++;
      chk(lat[0][s] == lat[1][s] && lat[4][s] == lat[5][s], "decay unit does not change latency");
    end
    $display("samples with R >= 1: %0d of %0d", n_above, NS);
    chk(n_below > 0 && n_above > 0, "R crosses 1 over the sweep");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
