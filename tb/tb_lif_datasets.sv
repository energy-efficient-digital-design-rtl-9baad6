// tb_lif_datasets: the three dataset operating points of the variant
// comparison, on all six input/decay variants. Each dataset is represented by
// its measured spike statistics: the share of time steps that carry any
// spike (temporal density) and the share of input channels active in a step
// (input density), together with the decay used for it:
//   AudioMNIST  temporal 16.6 %, input 74.8 %, beta = 1 - 2^-4 (0.9375)
//   N-MNIST     temporal 93.7 %, input  1.6 %, beta = 1 - 2^-1 (0.5)
//   MNIST       temporal 100 %,  input 13.2 %, beta = 1 - 2^-4 (0.9375)
// For every dataset and variant, 8 samples of 100 steps x 8 channels are
// drawn (each channel of an active step fires with the input density, at
// least one channel per active step) and sent back to back. Every report is
// checked against the reference model and every sample's latency against the
// cycle budget (serial: 1 per all-zero step + 9 per active step; AER: 2 per
// packet). Prints the mean latency (ns at 100 MHz) of each variant and the
// AER / clock-driven ratio, which must be below 1 for the two datasets with
// sparse input channels (N-MNIST, MNIST).
module tb_lif_datasets;
  import lif_pkg::*;
  import tb_lif_ref_pkg::*;

  localparam int NV = 6;
  localparam int ND = 3;
  localparam int NSAMP = 8;
  localparam int MODES  [NV] = '{0, 0, 1, 1, 2, 2};
  localparam int DECAYS [NV] = '{0, 1, 0, 1, 0, 1};
  localparam int TDENS  [ND] = '{166, 937, 1000};   // per mille
  localparam int IDENS  [ND] = '{748, 16, 132};     // per mille
  localparam int SHN    [ND] = '{4, 1, 4};
  localparam int BQ     [ND] = '{240, 128, 240};
  localparam int WTS    [8]  = '{12, -5, 20, 7, -9, 31, 3, 15};

  int checks = 0, failures = 0, cyc = 0, done_cnt = 0;
  logic clk = 0, rst = 1;
  logic [7:0] stim [ND][NSAMP][100];
  int lat_sum [ND][NV];
  bit stim_ready = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    wait (cyc > 1000000);
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
    for (int d = 0; d < ND; d++)
      for (int s = 0; s < NSAMP; s++)
        for (int t = 0; t < 100; t++) begin
          stim[d][s][t] = 0;
          if (int'($urandom_range(999)) < TDENS[d]) begin
            for (int c = 0; c < 8; c++)
              if (int'($urandom_range(999)) < IDENS[d]) stim[d][s][t][c] = 1'b1;
            if (stim[d][s][t] == 0) stim[d][s][t][$urandom_range(7)] = 1'b1;
          end
        end
    stim_ready = 1;
  end

  for (genvar d = 0; d < ND; d++) begin : g_d
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

      lif_neuron #(.MODE(M), .DECAY(D), .BETA_Q(BQ[d]), .SHIFT_N(SHN[d])) dut (
        .clk(clk), .rst(rst), .clr(clr),
        .step_valid(sv), .step_ready(srdy), .step_spikes(sx),
        .aer_valid(av), .aer_ready(ardy), .aer_addr(aa), .aer_ts(at),
        .out_valid(ov), .spike_out(so), .out_ts(ots), .u_mem(um));

      always @(posedge clk) if (!rst && ov) begin
        last_rep = cyc;
        if (exp_spk.size() == 0) chk(0, $sformatf("d%0d v%0d unexpected report", d, v));
        else begin
          bit es; int eu;
          es = exp_spk.pop_front(); eu = exp_u.pop_front();
          chk(so == es && int'(um) == eu,
              $sformatf("d%0d v%0d got spike %0d u %0d, exp %0d %0d", d, v, so, um, es, eu));
        end
      end

      initial begin
        lat_sum[d][v] = 0;
        wait (stim_ready);
        wait (rst == 0);
        @(posedge clk); #1;
        for (int s = 0; s < NSAMP; s++) begin
          int u, cnt, last, budget, l;
          bit spk;
          u = 0; cnt = 1; last = 0; budget = 0;
          for (int t = 0; t < 100; t++) begin
            if (M == MODE_EVENT_AER) begin
              for (int c = 0; c < 8; c++) if (stim[d][s][t][c]) begin
                u = ref_decay(u, t - last, DECAYS[v], BQ[d], 8, SHN[d]);
                u = ref_fire(ref_sat(u + WTS[c]), 64, 1, spk);
                last = t; budget += 2;
                exp_spk.push_back(spk); exp_u.push_back(u);
              end
            end else begin
              if (stim[d][s][t] == 0 && M == MODE_EVENT_SERIAL) begin
                if (cnt < 127) cnt++;
                spk = 0;
              end else begin
                u = ref_decay(u, (M == MODE_EVENT_SERIAL) ? cnt : 1, DECAYS[v], BQ[d], 8, SHN[d]);
                cnt = 1;
                for (int c = 0; c < 8; c++) if (stim[d][s][t][c]) u = ref_sat(u + WTS[c]);
                u = ref_fire(u, 64, 1, spk);
              end
              budget += (stim[d][s][t] == 0) ? 1 : 9;
              exp_spk.push_back(spk); exp_u.push_back(u);
            end
          end
          clr = 1; @(posedge clk); #1 clr = 0;
          first_acc = -1;
          for (int t = 0; t < 100; t++) begin
            if (M == MODE_EVENT_AER) begin
              for (int c = 0; c < 8; c++) if (stim[d][s][t][c]) begin
                av = 1; aa = 3'(c); at = 7'(t);
                do begin #1; @(posedge clk); end while (!ardy);
                if (first_acc < 0) first_acc = cyc;
                #1;
              end
            end else begin
              sv = 1; sx = stim[d][s][t];
              do begin #1; @(posedge clk); end while (!srdy);
              if (first_acc < 0) first_acc = cyc;
              #1;
            end
          end
          sv = 0; av = 0;
          wait (exp_spk.size() == 0);
          l = last_rep - first_acc - 1;
          chk(l == budget, $sformatf("d%0d v%0d latency %0d budget %0d", d, v, l, budget));
          lat_sum[d][v] += l;
          @(posedge clk); #1;
        end
        done_cnt++;
      end
    end
  end

  initial begin
    string names [ND] = '{"AudioMNIST", "N-MNIST", "MNIST"};
    repeat (3) @(posedge clk);
    #1 rst = 0;
    wait (done_cnt == NV * ND);
    $display("mean latency per 100-step sample, ns at 100 MHz");
    $display("dataset      clk-mul clk-sh ev-ser-mul ev-ser-sh aer-mul aer-sh  AER/clock");
    for (int d = 0; d < ND; d++) begin
      real r;
      r = real'(lat_sum[d][4]) / real'(lat_sum[d][0]);
      $display("%-11s  %6d %6d   %6d    %6d  %6d %6d     %5.2f", names[d],
               10 * lat_sum[d][0] / NSAMP, 10 * lat_sum[d][1] / NSAMP, 10 * lat_sum[d][2] / NSAMP,
               10 * lat_sum[d][3] / NSAMP, 10 * lat_sum[d][4] / NSAMP, 10 * lat_sum[d][5] / NSAMP, r);
      if (d > 0) chk(r < 1.0, $sformatf("%s: AER faster than clock-driven", names[d]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
