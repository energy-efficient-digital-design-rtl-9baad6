// lif_neuron: one digital leaky integrate-and-fire neuron (top entity).
//
// The neuron integrates weighted input spikes into a 9-bit membrane potential
// that leaks by a factor beta per time step, and emits a spike when the
// potential exceeds the threshold VTH, after which it is reset. Three
// configuration parameters, fixed before synthesis, select one of the
// variants compared in the paper plus the reset rule:
//   MODE  : MODE_CLOCK_SERIAL  bit vector per step, decays every step
//           MODE_EVENT_SERIAL  bit vector per step, decays by beta^dt only on
//                              steps that carry spikes
//           MODE_EVENT_AER     one (address, timestamp) packet per spike,
//                              decays by beta^dt per packet
//   DECAY : DECAY_MULT (exact LUT coefficient, multiplier) or
//           DECAY_SHIFT (power-of-two approximation, shifter)
//   RESET : RESET_ZERO or RESET_SUB
// Structure: neuron_cu (control FSM) drives neuron_dp (membrane register,
// exp decay, adder, firing/reset, elapsed-time tracker) and addresses
// weights_rom, which feeds the weight of the current channel to the datapath.
//
// Interface: synchronous active-high rst and clr (clr zeroes the potential and
// the time state to start a new sample). Serial input: step_valid/step_ready/
// step_spikes, one N_IN-bit vector per time step. AER input: aer_valid/
// aer_ready/aer_addr/aer_ts, one packet per input spike, timestamps
// non-decreasing and less than 2^T_BITS apart. The port set the chosen MODE
// does not use has its ready held low. Output: out_valid pulses once per step
// (serial) or per packet (AER) with spike_out and out_ts; u_mem shows the
// potential. Timing: an all-zero step takes 1 cycle, a step with spikes
// 1 + N_IN cycles, an AER packet 2 cycles; out_valid follows one cycle later.
//
// Widths (9/6/7/3 bits, 8 channels), beta = 1 - 2^-4 and the block structure
// follow the paper. Default variant (event-driven AER, shifter, subtract
// reset), threshold, weights, handshakes and cycle split are this design's.
module lif_neuron
  import lif_pkg::*;
#(
  parameter int unsigned              N_IN      = N_IN_D,
  parameter int unsigned              U_BITS    = U_BITS_D,
  parameter int unsigned              W_BITS    = W_BITS_D,
  parameter int unsigned              T_BITS    = T_BITS_D,
  parameter int unsigned              A_BITS    = A_BITS_D,
  parameter int unsigned              BETA_FRAC = BETA_FRAC_D,
  parameter int unsigned              BETA_Q    = 240,   // 0.9375
  parameter int unsigned              SHIFT_N   = 4,     // beta = 1 - 2^-4
  parameter logic signed [U_BITS-1:0] VTH       = 64,
  parameter logic [N_IN*W_BITS-1:0]   WEIGHTS   = {6'h0F, 6'h03, 6'h1F, 6'h37,
                                                   6'h07, 6'h14, 6'h3B, 6'h0C},
  parameter mode_e                    MODE      = MODE_EVENT_AER,
  parameter decay_e                   DECAY     = DECAY_SHIFT,
  parameter reset_e                   RESET     = RESET_SUB
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     clr,
  input  logic                     step_valid,
  output logic                     step_ready,
  input  logic [N_IN-1:0]          step_spikes,
  input  logic                     aer_valid,
  output logic                     aer_ready,
  input  logic [A_BITS-1:0]        aer_addr,
  input  logic [T_BITS-1:0]        aer_ts,
  output logic                     out_valid,
  output logic                     spike_out,
  output logic [T_BITS-1:0]        out_ts,
  output logic signed [U_BITS-1:0] u_mem
);

  dp_ctrl_t                 ctrl;
  logic [A_BITS-1:0]        rom_addr;
  logic [T_BITS-1:0]        dp_ts;
  logic                     dp_spike;
  logic signed [W_BITS-1:0] weight;

  neuron_cu #(.N_IN(N_IN), .A_BITS(A_BITS), .T_BITS(T_BITS), .MODE(MODE)) u_cu (
    .clk(clk), .rst(rst), .clr(clr),
    .step_valid(step_valid), .step_ready(step_ready), .step_spikes(step_spikes),
    .aer_valid(aer_valid), .aer_ready(aer_ready), .aer_addr(aer_addr), .aer_ts(aer_ts),
    .ctrl(ctrl), .rom_addr(rom_addr), .dp_ts(dp_ts), .dp_spike(dp_spike),
    .out_valid(out_valid), .spike_out(spike_out), .out_ts(out_ts)
  );

  neuron_dp #(
    .U_BITS(U_BITS), .W_BITS(W_BITS), .T_BITS(T_BITS), .BETA_FRAC(BETA_FRAC),
    .BETA_Q(BETA_Q), .SHIFT_N(SHIFT_N), .VTH(VTH),
    .MODE(MODE), .DECAY(DECAY), .RESET(RESET)
  ) u_dp (
    .clk(clk), .rst(rst), .clr(clr), .ctrl(ctrl), .weight(weight), .ts(dp_ts),
    .spike(dp_spike), .u_mem(u_mem)
  );

  weights_rom #(.N_IN(N_IN), .W_BITS(W_BITS), .A_BITS(A_BITS), .WEIGHTS(WEIGHTS)) u_rom (
    .addr(rom_addr), .weight(weight)
  );

  // Input handshake rules: a presented item stays unchanged until taken.
  a_step_hold : assert property (@(posedge clk) disable iff (rst || clr)
    step_valid && !step_ready |=> step_valid && $stable(step_spikes))
    else $error("step input changed before it was taken");
  a_aer_hold : assert property (@(posedge clk) disable iff (rst || clr)
    aer_valid && !aer_ready |=> aer_valid && $stable(aer_addr) && $stable(aer_ts))
    else $error("AER packet changed before it was taken");

endmodule
