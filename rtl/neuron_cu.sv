// neuron_cu: control unit of the LIF neuron.
//
// A small FSM that turns the input stream into a sequence of datapath control
// words (lif_pkg::dp_ctrl_t) and ROM addresses. Its behaviour depends on MODE.
//
// Serial modes (MODE_CLOCK_SERIAL, MODE_EVENT_SERIAL). One time step is an
// N_IN-bit vector on step_spikes, taken when step_valid && step_ready.
//   * All-zero step, 1 cycle. Clock-driven: the potential is decayed by beta
//     and checked against the threshold. Event-driven: nothing is computed,
//     only the elapsed-time counter advances.
//   * Step with at least one spike, 1 + N_IN cycles, not pipelined: the first
//     cycle decays the potential (by beta, or by beta^dt in the event-driven
//     neuron, which then restarts its counter); then one cycle per channel,
//     in order 0..N_IN-1, adds that channel's weight if its bit is set. The
//     firing check and reset are merged into the last channel cycle.
//   The result of every step is reported once on out_valid/spike_out, with
//   out_ts the index of the step since the last clear.
//
// AER mode (MODE_EVENT_AER). One spike is a packet (aer_addr, aer_ts): the
// channel address and the time step it belongs to, taken when aer_valid &&
// aer_ready. Each packet takes 2 cycles: the packet is latched, then the
// potential is decayed by beta^dt (dt from the timestamp), the weight at
// aer_addr added and the threshold checked, all in one cycle. Each packet is
// reported on out_valid/spike_out with out_ts = its timestamp.
//
// out_valid, spike_out and out_ts are registered: they appear the cycle after
// the cycle that computed them. rst and clr are synchronous. The serial and AER
// behaviour (scan every channel, skip silent steps, process only addressed
// events) follows the paper; the handshakes, the cycle split and the per-event
// firing check in AER mode are this design's choices.
module neuron_cu
  import lif_pkg::*;
#(
  parameter int unsigned N_IN   = N_IN_D,
  parameter int unsigned A_BITS = A_BITS_D,
  parameter int unsigned T_BITS = T_BITS_D,
  parameter mode_e       MODE   = MODE_EVENT_AER
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              clr,
  // serial time-step input
  input  logic              step_valid,
  output logic              step_ready,
  input  logic [N_IN-1:0]   step_spikes,
  // AER event input
  input  logic              aer_valid,
  output logic              aer_ready,
  input  logic [A_BITS-1:0] aer_addr,
  input  logic [T_BITS-1:0] aer_ts,
  // datapath and ROM
  output dp_ctrl_t          ctrl,
  output logic [A_BITS-1:0] rom_addr,
  output logic [T_BITS-1:0] dp_ts,
  input  logic              dp_spike,
  // result
  output logic              out_valid,
  output logic              spike_out,
  output logic [T_BITS-1:0] out_ts
);

  typedef enum logic [1:0] {S_IDLE, S_CHAN, S_EVT} state_e;

  localparam bit SERIAL = (MODE != MODE_EVENT_AER);
  localparam logic [A_BITS-1:0] LAST_CH = A_BITS'(N_IN - 1);

  state_e            state, state_n;
  logic [N_IN-1:0]   x_q;        // latched spike vector of the current step
  logic [A_BITS-1:0] ch_q;       // channel being scanned
  logic [A_BITS-1:0] addr_q;     // latched AER address
  logic [T_BITS-1:0] ts_q;       // step index (serial) / packet timestamp (AER)
  logic [T_BITS-1:0] step_q;     // steps taken since clear (serial)
  logic              take_step, take_evt, report;

  always_comb begin
    ctrl       = DP_NOP;
    state_n    = state;
    step_ready = 1'b0;
    aer_ready  = 1'b0;
    take_step  = 1'b0;
    take_evt   = 1'b0;
    report     = 1'b0;
    rom_addr   = SERIAL ? ch_q : addr_q;
    dp_ts      = ts_q;
    case (state)
      S_IDLE: begin
        if (SERIAL) begin
          step_ready = 1'b1;
          if (step_valid) begin
            take_step = 1'b1;
            if (step_spikes == '0) begin
              report = 1'b1;
              if (MODE == MODE_CLOCK_SERIAL) begin
                ctrl.decay_en = 1'b1;
                ctrl.fire_en  = 1'b1;
                ctrl.load     = 1'b1;
              end else begin
                ctrl.dt_idle  = 1'b1;
              end
            end else begin
              ctrl.decay_en  = 1'b1;
              ctrl.load      = 1'b1;
              ctrl.dt_commit = 1'b1;
              state_n        = S_CHAN;
            end
          end
        end else begin
          aer_ready = 1'b1;
          if (aer_valid) begin
            take_evt = 1'b1;
            state_n  = S_EVT;
          end
        end
      end
      S_CHAN: begin
        ctrl.add_en = x_q[ch_q];
        ctrl.load   = 1'b1;
        if (ch_q == LAST_CH) begin
          ctrl.fire_en = 1'b1;
          report       = 1'b1;
          state_n      = S_IDLE;
        end
      end
      S_EVT: begin
        ctrl.decay_en  = 1'b1;
        ctrl.add_en    = 1'b1;
        ctrl.fire_en   = 1'b1;
        ctrl.load      = 1'b1;
        ctrl.dt_commit = 1'b1;
        report         = 1'b1;
        state_n        = S_IDLE;
      end
      default: state_n = S_IDLE;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst || clr) begin
      state     <= S_IDLE;
      x_q       <= '0;
      ch_q      <= '0;
      addr_q    <= '0;
      ts_q      <= '0;
      step_q    <= '0;
      out_valid <= 1'b0;
      spike_out <= 1'b0;
      out_ts    <= '0;
    end else begin
      state     <= state_n;
      out_valid <= report;
      if (report) begin
        spike_out <= dp_spike && ctrl.fire_en;
        out_ts    <= ts_q;
      end
      if (take_step) begin
        x_q    <= step_spikes;
        ch_q   <= '0;
        ts_q   <= step_q;
        step_q <= step_q + T_BITS'(1);
        if (step_spikes == '0) out_ts <= step_q;
      end
      if (take_evt) begin
        addr_q <= aer_addr;
        ts_q   <= aer_ts;
      end
      if (state == S_CHAN) ch_q <= ch_q + A_BITS'(1);
    end
  end

endmodule
