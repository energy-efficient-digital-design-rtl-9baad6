// dt_tracker: keeps the time elapsed since the membrane was last updated.
//
// The event-driven neuron decays lazily, by beta^dt, so it must know dt, the
// number of time steps since the last update. How dt is obtained depends on
// MODE:
//   MODE_EVENT_SERIAL : a saturating counter. Each all-zero step (idle_step)
//                       adds one; an update (commit) restarts it at 1, the
//                       distance to the next step. Starts at 1.
//   MODE_EVENT_AER    : a register holding the timestamp of the last update;
//                       dt = ts - last_ts modulo 2^T_BITS, and commit stores
//                       ts. Starts at 0.
//   MODE_CLOCK_SERIAL : the clock-driven neuron decays every step, dt = 1.
// dt is combinational from the state (and from ts in AER mode); the state
// changes on the clock edge, synchronous rst/clr. The counter and register
// follow the paper; the AER timestamp field, the start values and saturation
// are this design's choices.
module dt_tracker
  import lif_pkg::*;
#(
  parameter int unsigned T_BITS = T_BITS_D,
  parameter mode_e       MODE   = MODE_EVENT_AER
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              clr,
  input  logic              idle_step,
  input  logic              commit,
  input  logic [T_BITS-1:0] ts,
  output logic [T_BITS-1:0] dt
);

  localparam logic [T_BITS-1:0] ONE  = T_BITS'(1);
  localparam logic [T_BITS-1:0] TMAX = '1;

  logic [T_BITS-1:0] state;

  always_ff @(posedge clk) begin
    if (rst || clr) begin
      state <= (MODE == MODE_EVENT_AER) ? '0 : ONE;
    end else if (MODE == MODE_EVENT_AER) begin
      if (commit) state <= ts;
    end else if (MODE == MODE_EVENT_SERIAL) begin
      if (commit)                         state <= ONE;
      else if (idle_step && state != TMAX) state <= state + ONE;
    end else begin
      state <= ONE;
    end
  end

  always_comb begin
    case (MODE)
      MODE_EVENT_AER:    dt = ts - state;
      MODE_EVENT_SERIAL: dt = state;
      default:           dt = ONE;
    endcase
  end

endmodule
