// neuron_dp: datapath of the LIF neuron.
//
// The membrane potential circulates through one combinational loop, in the
// order of the update equation U[t+1] = beta^dt * U[t] + W * X[t] - R[t]:
//
//   membrane_reg -> exp_decay -> sat_adder -> firing_reset -> membrane_reg
//
// Each stage is enabled by a bit of the control word (lif_pkg::dp_ctrl_t) from
// the control unit; a disabled stage passes its input through, so one cycle
// can decay only, add only, or decay, add and fire together. load writes the
// result at the clock edge. spike is the firing result of the current cycle
// (only when fire_en is set). The dt_tracker that supplies the elapsed time to
// the decay stage lives here too; ts is the AER timestamp of the event being
// processed. The stage chain follows the paper's datapath schematic; the
// per-stage enables are this design's way of letting the control unit
// sequence it.
module neuron_dp
  import lif_pkg::*;
#(
  parameter int unsigned              U_BITS    = U_BITS_D,
  parameter int unsigned              W_BITS    = W_BITS_D,
  parameter int unsigned              T_BITS    = T_BITS_D,
  parameter int unsigned              BETA_FRAC = BETA_FRAC_D,
  parameter int unsigned              BETA_Q    = 240,
  parameter int unsigned              SHIFT_N   = 4,
  parameter logic signed [U_BITS-1:0] VTH       = 64,
  parameter mode_e                    MODE      = MODE_EVENT_AER,
  parameter decay_e                   DECAY     = DECAY_SHIFT,
  parameter reset_e                   RESET     = RESET_SUB
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     clr,
  input  dp_ctrl_t                 ctrl,
  input  logic signed [W_BITS-1:0] weight,
  input  logic [T_BITS-1:0]        ts,
  output logic                     spike,
  output logic signed [U_BITS-1:0] u_mem
);

  logic [T_BITS-1:0]        dt;
  logic signed [U_BITS-1:0] u_decayed, u_dec, u_added, u_sum, u_fired, u_next;
  logic                     fire;

  membrane_reg #(.U_BITS(U_BITS)) u_mreg (
    .clk(clk), .rst(rst), .clr(clr), .load(ctrl.load), .d(u_next), .q(u_mem)
  );

  dt_tracker #(.T_BITS(T_BITS), .MODE(MODE)) u_dt (
    .clk(clk), .rst(rst), .clr(clr),
    .idle_step(ctrl.dt_idle), .commit(ctrl.dt_commit), .ts(ts), .dt(dt)
  );

  exp_decay #(
    .U_BITS(U_BITS), .T_BITS(T_BITS), .BETA_FRAC(BETA_FRAC),
    .BETA_Q(BETA_Q), .SHIFT_N(SHIFT_N), .DECAY(DECAY)
  ) u_decay (
    .u(u_mem), .dt(dt), .y(u_decayed)
  );

  sat_adder #(.U_BITS(U_BITS), .W_BITS(W_BITS)) u_add (
    .a(u_dec), .w(weight), .y(u_added)
  );

  firing_reset #(.U_BITS(U_BITS), .VTH(VTH), .RESET(RESET)) u_fire (
    .u(u_sum), .spike(fire), .y(u_fired)
  );

  always_comb begin
    u_dec  = ctrl.decay_en ? u_decayed : u_mem;
    u_sum  = ctrl.add_en   ? u_added   : u_dec;
    u_next = ctrl.fire_en  ? u_fired   : u_sum;
    spike  = ctrl.fire_en && fire;
  end

endmodule
