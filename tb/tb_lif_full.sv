// tb_lif_full: the neuron with every parameter at its default (event-driven
// AER, shifter decay, subtract reset), driven by the sparsity sweep used to
// compare the variants: 100 time steps, 8 input channels, temporal density
// (share of steps that carry any spike) 5 % to 100 % in steps of 5 %, and
// input density (share of the 8 channels active in such a step) 25, 50, 75
// and 100 %. Packets are sent back to back. Every report is checked against
// the reference model (spike, time stamp, potential), and the total latency
// of each sample, from the first packet taken to the last report, must be
// 2 cycles per packet. The latency of each sample is printed, in cycles
// and in ns at a 100 MHz clock.
module tb_lif_full;
  import lif_pkg::*;
  import tb_lif_ref_pkg::*;

  localparam int WTS [8] = '{12, -5, 20, 7, -9, 31, 3, 15};

  int checks = 0, failures = 0, cyc = 0, n_spk = 0;
  logic clk = 0, rst = 1, clr = 0;
  logic sv = 0, av = 0, srdy, ardy, ov, so;
  logic [7:0] sx = 0;
  logic [2:0] aa = 0;
  logic [6:0] at = 0, ots;
  logic signed [8:0] um;
  bit exp_spk [$]; int exp_ts [$]; int exp_u [$];
  int first_acc, last_rep;

  lif_neuron dut (
    .clk(clk), .rst(rst), .clr(clr),
    .step_valid(sv), .step_ready(srdy), .step_spikes(sx),
    .aer_valid(av), .aer_ready(ardy), .aer_addr(aa), .aer_ts(at),
    .out_valid(ov), .spike_out(so), .out_ts(ots), .u_mem(um));

  always #5 clk = ~clk;   // 100 MHz
  always @(posedge clk) cyc++;

  initial begin
    wait (cyc > 500000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  always @(posedge clk) if (!rst && ov) begin
    last_rep = cyc;
    if (exp_spk.size() == 0) chk(0, "unexpected report");
    else begin
      bit es; int et, eu;
      es = exp_spk.pop_front(); et = exp_ts.pop_front(); eu = exp_u.pop_front();
      chk(so == es, $sformatf("spike got %0d exp %0d", so, es));
      chk(int'(ots) == et, $sformatf("ts got %0d exp %0d", ots, et));
      chk(int'(um) == eu, $sformatf("u got %0d exp %0d", um, eu));
      n_spk += int'(so);
    end
  end

  initial begin
    logic [7:0] st [100];
    repeat (3) @(posedge clk);
    #1 rst = 0;
    $display(" in.dens  temporal  packets  cycles   ns");
    for (int id = 1; id <= 4; id++)
      for (int td = 5; td <= 100; td += 5) begin
        int u, last, npk, nact;
        bit spk;
        // build the sample: exactly td of the 100 steps active, 2*id channels each
        for (int t = 0; t < 100; t++) st[t] = 0;
        nact = 0;
        while (nact < td) begin
          int t, n;
          t = int'($urandom_range(99));
          if (st[t] == 0) begin
            n = 0;
            while (n < 2 * id) begin
              int c;
              c = int'($urandom_range(7));
              if (!st[t][c]) begin st[t][c] = 1'b1; n++; end
            end
            nact++;
          end
        end
        // model
        u = 0; last = 0; npk = 0;
        for (int t = 0; t < 100; t++)
          for (int c = 0; c < 8; c++) if (st[t][c]) begin
            u = ref_decay(u, t - last, 1, 240, 8, 4);
            u = ref_sat(u + WTS[c]);
            u = ref_fire(u, 64, 1, spk);
            last = t; npk++;
            exp_spk.push_back(spk); exp_ts.push_back(t); exp_u.push_back(u);
          end
        // drive
        clr = 1; @(posedge clk); #1 clr = 0;
        first_acc = -1;
        for (int t = 0; t < 100; t++)
          for (int c = 0; c < 8; c++) if (st[t][c]) begin
            av = 1; aa = 3'(c); at = 7'(t);
            do begin #1; @(posedge clk); end while (!ardy);
            if (first_acc < 0) first_acc = cyc;
            #1;
          end
        av = 0;
        wait (exp_spk.size() == 0);
        // the reporting edge comes one clock after the last processing cycle
        chk(last_rep - first_acc - 1 == 2 * npk,
            $sformatf("latency %0d cycles for %0d packets", last_rep - first_acc, npk));
        $display("   %3d%%     %3d%%    %4d    %5d  %6d", 25 * id, td, npk,
                 last_rep - first_acc - 1, 10 * (last_rep - first_acc - 1));
        @(posedge clk); #1;
      end
    $display("output spikes over the sweep: %0d", n_spk);
    chk(n_spk > 0, "the neuron fired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
