// spin_update: the stochastic update of one spin (Fig. 3: the multiplier
// after "Annealing", "tanh" and "Comparator"), i.e. the paper's rule
//   m_i(t+1) = sign[ tanh(beta * I_BB,i) - rand(-1,1) ].
//
// x = beta * field_bb is exact (6 fraction bits: 3 from beta, 3 from B).
// tanh is odd, so its magnitude is read from a 128-entry table indexed by
// |x| in steps of 1/16 (truncated; |x| >= 8 uses the last entry) and the sign
// of x is put back. The result, a Q1.16 number, is compared with the random
// number `rnd` (Q1.16 in [-1,1)): m_next = 1 (+1) when tanh > rnd, else 0
// (-1). For x = 0 this gives +1 with probability 1/2. The table, computed
// from tanh at elaboration, and its resolution are this design's choice;
// the paper names a tanh block but not its realisation.
//
// Timing: purely combinational.
module spin_update
  import bbim_pkg::*;
#(
  parameter int FBW = 20
) (
  input  logic signed [FBW-1:0]    field_bb,
  input  beta_t                    beta,
  input  logic signed [RAND_W-1:0] rnd,
  output logic signed [RAND_W:0]   tanh_s,
  output logic                     m_next
);
  localparam tanh_lut_t LUT = make_tanh_lut();
  localparam int XW = FBW + BETA_W + 1;

  logic signed [XW-1:0] x;
  logic        [XW-1:0] ax;
  logic        [XW-1:0] q16;
  logic [TANH_IDX_W-1:0] idx;
  logic [TANH_W-1:0]     t;

  always_comb begin
    x   = XW'(field_bb) * $signed({1'b0, beta});
    ax  = x[XW-1] ? XW'(-x) : XW'(x);
    q16 = ax >> (B_FRAC + BETA_FRAC - 4);          // |x| in 1/16 steps
    idx = (q16 > XW'(TANH_ENTRIES - 1)) ? TANH_IDX_W'(TANH_ENTRIES - 1)
                                        : q16[TANH_IDX_W-1:0];
    t   = LUT[idx];
    tanh_s = x[XW-1] ? -(RAND_W+1)'({2'b00, t}) : (RAND_W+1)'({2'b00, t});
    m_next = tanh_s > (RAND_W+1)'(rnd);
  end
endmodule
