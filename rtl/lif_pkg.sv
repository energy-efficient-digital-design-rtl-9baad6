// lif_pkg: types and constants shared by the LIF neuron blocks.
//
// The widths are the ones the paper's hardware study uses: 9-bit membrane
// potential, 6-bit weights, a 7-bit time field and a 3-bit input address for
// 8 input channels. The three configuration enums select, before synthesis,
// which of the six compared neuron variants is built (input handling x decay
// unit) and which reset rule the firing logic applies. The constant functions
// compute the decay look-up tables at elaboration time:
//   beta_pow_q32(b, f, n)  = (b / 2^f)^n as a 32-bit fraction (2^32 = 1.0)
//   beta_pow_q(b, f, n)    = the same rounded to f fraction bits
//   shift_code(b, f, n)    = the closest of {2^-k, 1 - 2^-k : k = 1..15} to it
// The candidate set of the shift code is this design's choice; the paper only
// says beta^dt is approximated by a power of two and that beta = 1 - 2^-n.
package lif_pkg;

  localparam int unsigned U_BITS_D    = 9;   // membrane potential
  localparam int unsigned W_BITS_D    = 6;   // weights
  localparam int unsigned T_BITS_D    = 7;   // time / dt
  localparam int unsigned A_BITS_D    = 3;   // AER address
  localparam int unsigned N_IN_D      = 8;   // input channels
  localparam int unsigned BETA_FRAC_D = 8;   // coefficient fraction bits
  localparam int unsigned SHIFT_K_MAX = 15;  // largest shift in a shift code

  // How inputs arrive and when the potential is decayed.
  typedef enum logic [1:0] {
    MODE_CLOCK_SERIAL = 2'd0,  // bit vector per step, decay every step
    MODE_EVENT_SERIAL = 2'd1,  // bit vector per step, decay only on active steps
    MODE_EVENT_AER    = 2'd2   // one (address, timestamp) packet per spike
  } mode_e;

  typedef enum logic {
    DECAY_MULT  = 1'b0,        // exact beta^dt from a LUT, multiplier
    DECAY_SHIFT = 1'b1         // power-of-two approximation, shifter
  } decay_e;

  typedef enum logic {
    RESET_ZERO = 1'b0,         // potential set to 0 on a spike
    RESET_SUB  = 1'b1          // threshold subtracted on a spike
  } reset_e;

  // One entry of the shifter LUT.
  //   keep=1          : y = u               (dt = 0)
  //   keep=0, sub=1   : y = u - (u >>> k)   (factor 1 - 2^-k)
  //   keep=0, sub=0   : y = u >>> k         (factor 2^-k)
  typedef struct packed {
    logic       keep;
    logic       sub;
    logic [3:0] k;
  } shift_code_t;

  // Stage enables the control unit gives the datapath each cycle.
  typedef struct packed {
    logic decay_en;   // pass the potential through the exp-decay stage
    logic add_en;     // add the current ROM weight
    logic fire_en;    // apply the firing check and reset
    logic load;       // write the result into the membrane register
    logic dt_idle;    // an all-zero step went by (event serial counter)
    logic dt_commit;  // the potential was brought up to date now
  } dp_ctrl_t;

  localparam dp_ctrl_t DP_NOP = '{default: 1'b0};

  function automatic longint unsigned beta_pow_q32(int unsigned beta_q,
                                                   int unsigned frac,
                                                   int unsigned n);
    longint unsigned p;
    p = 64'd1 << 32;
    for (int unsigned i = 0; i < n; i++) p = (p * beta_q) >> frac;
    return p;
  endfunction

  function automatic int unsigned beta_pow_q(int unsigned beta_q,
                                             int unsigned frac,
                                             int unsigned n);
    longint unsigned p;
    p = beta_pow_q32(beta_q, frac, n);
    return int'((p + (64'd1 << (31 - frac))) >> (32 - frac));
  endfunction

  function automatic shift_code_t shift_code(int unsigned beta_q,
                                             int unsigned frac,
                                             int unsigned n);
    longint unsigned v, c, err, best;
    shift_code_t r;
    if (n == 0) return '{keep: 1'b1, sub: 1'b0, k: 4'd0};
    v    = beta_pow_q32(beta_q, frac, n);
    best = 64'hFFFF_FFFF_FFFF_FFFF;
    r    = '{keep: 1'b0, sub: 1'b1, k: 4'd1};
    for (int unsigned k = 1; k <= SHIFT_K_MAX; k++) begin
      c   = (64'd1 << 32) - (64'd1 << (32 - k));        // 1 - 2^-k
      err = (v > c) ? v - c : c - v;
      if (err < best) begin best = err; r = '{keep: 1'b0, sub: 1'b1, k: 4'(k)}; end
      c   = 64'd1 << (32 - k);                          // 2^-k
      err = (v > c) ? v - c : c - v;
      if (err < best) begin best = err; r = '{keep: 1'b0, sub: 1'b0, k: 4'(k)}; end
    end
    return r;
  endfunction

endpackage
