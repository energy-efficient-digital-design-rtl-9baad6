// tb_lif_neuron: end-to-end test of the neuron in all six input/decay
// variants (clock-driven serial, event-driven serial, event-driven AER, each
// with multiplier and shifter decay), with both reset rules spread over them.
//
// Every instance gets the same input samples. A sample is a sequence of time
// steps, each an 8-bit spike vector; the serial instances receive it step by
// step, the AER instances as one (channel, step) packet per set bit in
// ascending order. Between samples clr restarts the neuron. An independent
// reference model (tb_lif_ref_pkg) predicts, for every reported step or
// packet, the spike flag, the time stamp and the potential; each report is
// compared with it. The latency of each item is checked: 1 cycle for an
// all-zero step, 1 + 8 cycles for a step with spikes, 2 cycles for a packet.
// The inputs are sometimes held while the neuron is busy (back-pressure) and
// sometimes paused. The test counts how often each mechanism occurred (idle
// and active steps, spikes with zero and subtract reset, adder saturation,
// packets sharing a time step, elapsed-time counter saturation, back-pressure,
// clear) and fails if one never did.
module tb_lif_neuron;
  import lif_pkg::*;
  import tb_lif_ref_pkg::*;

  localparam int NV      = 6;
  localparam int NSAMP   = 6;
  localparam int MAXSTEP = 260;
  localparam int MODES  [NV] = '{0, 0, 1, 1, 2, 2};
  localparam int DECAYS [NV] = '{0, 1, 0, 1, 0, 1};
  localparam int RESETS [NV] = '{0, 1, 1, 0, 0, 1};
  // weights large enough to drive the adder into saturation both ways
  localparam int WTS    [8]  = '{31, -32, 31, 31, 30, 29, 31, 28};
  localparam logic [47:0] WBITS = {6'd28, 6'd31, 6'd29, 6'd30, 6'd31, 6'd31, 6'h20, 6'd31};

  int checks = 0, failures = 0, cyc = 0;
  logic clk = 0, rst = 1;
  logic [7:0] stim [NSAMP][MAXSTEP];
  int  nsteps [NSAMP];
  bit  aer_ok [NSAMP];
  bit  stim_ready = 0;
  int  done_cnt = 0;
  // mechanism counters
  int n_idle = 0, n_active = 0, n_spk_zero = 0, n_spk_sub = 0, n_sat = 0;
  int n_dt0 = 0, n_dtsat = 0, n_bp = 0, n_clr = 0, n_evt = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    wait (cyc > 400000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  // ---------------------------------------------------------------- stimulus
  initial begin
    for (int s = 0; s < NSAMP; s++) begin
      int pt, pi;
      nsteps[s] = 100;
      aer_ok[s] = 1;
      case (s)
        0: begin pt = 100; pi = 50; end   // dense in time
        1: begin pt = 20;  pi = 25; end   // sparse in time
        2: begin pt = 100; pi = 100; end  // every input every step: saturation
        3: begin pt = 50;  pi = 75; end
        4: begin pt = 5;   pi = 50; nsteps[s] = 250; aer_ok[s] = 0; end // long silence
        default: begin pt = 35; pi = 40; end
      endcase
      for (int t = 0; t < MAXSTEP; t++) begin
        stim[s][t] = 0;
        if (t < nsteps[s] && int'($urandom_range(99)) < pt)
          for (int c = 0; c < 8; c++)
            if (int'($urandom_range(99)) < pi) stim[s][t][c] = 1'b1;
      end
      if (s == 4) begin
        for (int t = 2; t < 200; t++) stim[s][t] = 0;
        stim[s][1] = 8'h22; stim[s][230] = 8'h25;
      end
      if (s == 5) for (int t = 0; t < 60; t++) stim[s][t] = 8'h02; // inhibitory only
    end
    stim_ready = 1;
  end

  // -------------------------------------------------------------- instances
  for (genvar v = 0; v < NV; v++) begin : g_v
    localparam mode_e  M = mode_e'(MODES[v]);
    localparam decay_e D = decay_e'(DECAYS[v]);
    localparam reset_e R = reset_e'(RESETS[v]);

    logic clr = 0, sv = 0, av = 0, srdy, ardy, ov, so;
    logic [7:0] sx = 0;
    logic [2:0] aa = 0;
    logic [6:0] at = 0, ots;
    logic signed [8:0] um;

    lif_neuron #(.MODE(M), .DECAY(D), .RESET(R), .WEIGHTS(WBITS)) dut (
      .clk(clk), .rst(rst), .clr(clr),
      .step_valid(sv), .step_ready(srdy), .step_spikes(sx),
      .aer_valid(av), .aer_ready(ardy), .aer_addr(aa), .aer_ts(at),
      .out_valid(ov), .spike_out(so), .out_ts(ots), .u_mem(um));

    // expected reports: spike, ts, potential, latency
    bit exp_spk [$]; int exp_ts [$]; int exp_u [$]; int exp_lat [$];
    int acc_cyc [$];

    // reference model of one sample, fills the expectation queues
    task automatic model(int s);
      int u, cnt, last, dt;
      bit spk;
      u = 0; cnt = 1; last = 0;
      for (int t = 0; t < nsteps[s]; t++) begin
        if (M == MODE_EVENT_AER) begin
          for (int c = 0; c < 8; c++) if (stim[s][t][c]) begin
            dt = t - last;
            if (dt == 0) n_dt0++;
            u = ref_decay(u, dt, DECAYS[v], 240, 8, 4);
            if (u + WTS[c] > 255 || u + WTS[c] < -256) n_sat++;
            u = ref_sat(u + WTS[c]);
            u = ref_fire(u, 64, RESETS[v], spk);
            last = t;
            exp_spk.push_back(spk); exp_ts.push_back(t & 127); exp_u.push_back(u); exp_lat.push_back(2);
            n_evt++;
            if (spk) begin if (R == RESET_ZERO) n_spk_zero++; else n_spk_sub++; end
          end
        end else begin
          if (stim[s][t] == 0 && M == MODE_EVENT_SERIAL) begin
            if (cnt == 126) n_dtsat++;
            if (cnt < 127) cnt++;
            spk = 0;
          end else begin
            u = ref_decay(u, (M == MODE_EVENT_SERIAL) ? cnt : 1, DECAYS[v], 240, 8, 4);
            cnt = 1;
            for (int c = 0; c < 8; c++) if (stim[s][t][c]) begin
              if (u + WTS[c] > 255 || u + WTS[c] < -256) n_sat++;
              u = ref_sat(u + WTS[c]);
            end
            u = ref_fire(u, 64, RESETS[v], spk);
            if (spk) begin if (R == RESET_ZERO) n_spk_zero++; else n_spk_sub++; end
          end
          if (stim[s][t] == 0) n_idle++; else n_active++;
          exp_spk.push_back(spk); exp_ts.push_back(t & 127); exp_u.push_back(u);
          exp_lat.push_back(stim[s][t] == 0 ? 1 : 9);
        end
      end
    endtask

    // driver
    initial begin
      wait (stim_ready);
      @(posedge clk); #1;
      wait (rst == 0);
      for (int s = 0; s < NSAMP; s++) begin
        if (M == MODE_EVENT_AER && !aer_ok[s]) continue;
        // clear the neuron, then model the sample
        clr = 1; @(posedge clk); #1 clr = 0; n_clr++;
        model(s);
        for (int t = 0; t < nsteps[s]; t++) begin
          if (M == MODE_EVENT_AER) begin
            for (int c = 0; c < 8; c++) if (stim[s][t][c]) begin
              av = 1; aa = 3'(c); at = 7'(t);
              do begin
                #1;
                if (!ardy) n_bp++;
                @(posedge clk);
              end while (!ardy);
              acc_cyc.push_back(cyc);
              #1;
              if ($urandom_range(3) == 0) begin av = 0; repeat ($urandom_range(3)) @(posedge clk); #1; end
            end
          end else begin
            sv = 1; sx = stim[s][t];
            do begin
              #1;
              if (!srdy) n_bp++;
              @(posedge clk);
            end while (!srdy);
            acc_cyc.push_back(cyc);
            #1;
            if ($urandom_range(7) == 0) begin sv = 0; repeat ($urandom_range(3)) @(posedge clk); #1; end
          end
        end
        sv = 0; av = 0;
        wait (exp_spk.size() == 0);
        @(posedge clk); #1;
      end
      done_cnt++;
    end

    // checker
    always @(posedge clk) if (!rst && ov) begin
      if (exp_spk.size() == 0) chk(0, $sformatf("v%0d unexpected report", v));
      else begin
        bit es; int et, eu, el, ac;
        es = exp_spk.pop_front(); et = exp_ts.pop_front(); eu = exp_u.pop_front();
        el = exp_lat.pop_front(); ac = acc_cyc.pop_front();
        chk(so == es, $sformatf("v%0d spike got %0d exp %0d", v, so, es));
        chk(int'(ots) == et, $sformatf("v%0d ts got %0d exp %0d", v, ots, et));
        chk(int'(um) == eu, $sformatf("v%0d u got %0d exp %0d", v, um, eu));
        // report seen at this edge: cyc - 1 - accept edge = latency
        chk(cyc - 1 - ac == el, $sformatf("v%0d latency %0d exp %0d", v, cyc - 1 - ac, el));
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst = 0;
    wait (done_cnt == NV);
    $display("mechanisms: idle_steps=%0d active_steps=%0d aer_packets=%0d spikes_zero_reset=%0d spikes_sub_reset=%0d",
             n_idle, n_active, n_evt, n_spk_zero, n_spk_sub);
    $display("            adder_saturations=%0d same_step_packets=%0d dt_counter_saturations=%0d backpressure_cycles=%0d clears=%0d",
             n_sat, n_dt0, n_dtsat, n_bp, n_clr);
    chk(n_idle > 0, "idle steps happened");
    chk(n_active > 0, "active steps happened");
    chk(n_evt > 0, "AER packets happened");
    chk(n_spk_zero > 0, "zero-reset spikes happened");
    chk(n_spk_sub > 0, "subtract-reset spikes happened");
    chk(n_sat > 0, "adder saturation happened");
    chk(n_dt0 > 0, "packets sharing a step happened");
    chk(n_dtsat > 0, "elapsed-time counter saturation happened");
    chk(n_bp > 0, "back-pressure happened");
    chk(n_clr > 0, "clear happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
