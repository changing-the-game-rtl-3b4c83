// bbim_pkg: shared number formats, types and the tanh table of the
// Bounce-Bind Ising machine (BBIM).
//
// Number formats
//   spin bit        1 = +1, 0 = -1 (this design's encoding).
//   B               signed fixed point s[2][3]: sign, 2 integer and 3 fraction
//                   bits, range -4.0 .. +3.875 in steps of 0.125 (format from
//                   the paper).
//   beta            unsigned fixed point u[3][3], 0 .. 7.875 in steps of 0.125.
//                   The paper's schedule (0.125 .. 4.0, step 0.125) needs
//                   exactly this step; the width is this design's choice.
//   local field     integers for J, h and their sums; the field including
//                   B*m_i carries the 3 fraction bits of B.
//   random number   17-bit two's complement Q1.16 in [-1, 1).
//   tanh            unsigned Q0.16 magnitude, looked up at |beta*I| in steps
//                   of 1/16 up to 8 (128 entries); beyond 8 tanh is 1-2^-16.
// The energy and all counters are 32 bits wide.
package bbim_pkg;

  localparam int B_W        = 6;   // s[2][3]
  localparam int B_FRAC     = 3;
  localparam int BETA_W     = 6;   // u[3][3]
  localparam int BETA_FRAC  = 3;
  localparam int RAND_W     = 17;  // Q1.16
  localparam int TANH_W     = 16;  // Q0.16
  localparam int TANH_IDX_W = 7;   // |x| in 1/16 steps, 0 .. 127
  localparam int TANH_ENTRIES = 1 << TANH_IDX_W;
  localparam int E_W        = 32;  // energy
  localparam int CNT_W      = 32;  // rounds, samples

  typedef logic signed [B_W-1:0]    bb_t;
  typedef logic        [BETA_W-1:0] beta_t;
  typedef logic signed [E_W-1:0]    energy_t;
  typedef logic        [CNT_W-1:0]  count_t;

  // Run configuration written by the host before a start pulse.
  typedef struct packed {
    bb_t     bb;               // Bounce-Bind parameter B
    beta_t   beta0;            // first inverse temperature
    beta_t   beta_step;        // linear annealing increment
    beta_t   beta_end;         // last inverse temperature
    count_t  rounds_per_step;  // sweeps spent at each beta (>= 1)
    count_t  max_rounds;       // sweep limit, 0 = no limit
    logic    target_en;        // stop when energy <= target_energy
    energy_t target_energy;    // known ground-state energy
    logic    init_random;      // draw the initial spins from the PRNG
  } bbim_cfg_t;

  // tanh(k/16) as an unsigned Q0.16 number, saturated to 16 bits.
  function automatic logic [TANH_W-1:0] tanh_q16(int k);
    real x, e, v;
    x = real'(k) / 16.0;
    e = $exp(2.0 * x);
    v = (e - 1.0) / (e + 1.0) * 65536.0;
    if (v > 65535.0) v = 65535.0;
    return TANH_W'($rtoi(v));
  endfunction

  typedef logic [TANH_W-1:0] tanh_lut_t [TANH_ENTRIES];

  function automatic tanh_lut_t make_tanh_lut();
    tanh_lut_t l;
    for (int k = 0; k < TANH_ENTRIES; k++) l[k] = tanh_q16(k);
    return l;
  endfunction

endpackage
