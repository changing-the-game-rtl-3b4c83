// bbim_top: the Bounce-Bind Ising machine (BBIM).
//
// An Ising machine searches for a spin state m (m_i = +-1) of low energy
// E = -sum_{i<j} J_ij m_i m_j - sum_i h_i m_i (or, with ORDER = 3,
// E = -sum_{i<j<k} J_ijk m_i m_j m_k - sum_i h_i m_i). It updates one spin
// at a time by m_i <- sign[tanh(beta I) - rand(-1,1)] while beta is
// annealed. The Bounce-Bind machine adds B*m_i to the local field:
// I_BB,i = I_i + B m_i. This shifts the energy only by a constant, so the
// ground state is unchanged, but it sets how readily a spin flips: B < 0
// makes spins "bounce" out of local minima, B > 0 makes them "bind" to their
// state, B = 0 is the classical machine.
//
// One spin unit (Fig. 3 of the original description) is shared by all N
// spins and visits them in order:
//   coeff_memory   -> one coefficient row and h_i per spin
//   field_sum2/3   -> I_i and I_BB,i (ORDER selects the second- or
//                     third-order unit; the third-order unit multiplies
//                     spin pairs with XOR gates)
//   bb_controller  -> holds B (s[2][3]) and forms B m_i
//   annealer       -> beta schedule
//   lfsr32         -> random number
//   spin_update    -> beta multiply, tanh, comparator
//   spin_memory    -> the spin state
//   hitting_engine -> energy, best energy and state, hitting time, target
//   bbim_sequencer -> run control
//
// Host interface (this design's own): while `busy` is low the host writes
// coefficients (j_we..), fields (h_we..), initial spins (s_we..) and the
// PRNG seed (seed_we), sets `cfg` and pulses `start`; `cfg` is captured at
// that edge. When `done` rises, `best_energy`, `best_state` and
// `hit_sample` (the sample at which the best energy was first reached) hold
// the result; `hit` tells whether the target energy was reached.
// Each spin update takes 3 clock cycles, the energy pass before sampling 3N
// cycles, the optional random initialisation ceil(N/32) cycles.
// Defaults: second order, N = 2000 spins (the largest graphs the paper runs:
// G22, G39, K2000), 2-bit J and h (the paper's width for MAX-CUT).
module bbim_top
  import bbim_pkg::*;
#(
  parameter int ORDER = 2,
  parameter int N     = 2000,
  parameter int JW    = 2,
  parameter int ROW   = (ORDER == 3) ? N * (N - 1) / 2 : N,
  parameter int SW    = $clog2(ROW * (1 << (JW - 1)) + (1 << JW)) + 2
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // coefficient and field loading
  input  logic                        j_we,
  input  logic [$clog2(N)-1:0]        j_row,
  input  logic [$clog2(ROW)-1:0]      j_col,
  input  logic [JW-1:0]               j_data,
  input  logic                        h_we,
  input  logic [$clog2(N)-1:0]        h_row,
  input  logic [JW-1:0]               h_data,
  // initial spin state and PRNG seed
  input  logic                        s_we,
  input  logic [$clog2(N)-1:0]        s_idx,
  input  logic                        s_m,
  input  logic                        seed_we,
  input  logic [31:0]                 seed,
  // run control
  input  bbim_cfg_t                   cfg,
  input  logic                        start,
  output logic                        busy,
  output logic                        done,
  output beta_t                       beta,
  output count_t                      rounds,
  output count_t                      samples,
  // results
  output logic [N-1:0]                spins,
  output bb_t                         bb,
  output energy_t                     energy,
  output logic                        energy_valid,
  output energy_t                     best_energy,
  output logic [N-1:0]                best_state,
  output count_t                      hit_sample,
  output logic                        hit
);
  localparam int FBW = SW + B_FRAC + 1;

  bbim_cfg_t cfg_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                cfg_q <= '0;
    else if (start && !busy)   cfg_q <= cfg;
  end

  // ---- run controller ----
  logic [$clog2(N)-1:0]         idx;
  logic                         rd_en, sum_en, acc_en, init_done, upd_en;
  logic                         word_we, hit_clear, anneal_start, round_done;
  logic [$clog2((N+63)/32)-1:0] word_idx;
  logic                         anneal_done;

  bbim_sequencer #(.N(N)) u_seq (
    .clk, .rst_n,
    .start, .init_random(cfg_q.init_random), .max_rounds(cfg_q.max_rounds),
    .hit, .anneal_done,
    .busy, .done, .idx, .rd_en, .sum_en, .acc_en, .init_done, .upd_en,
    .word_we, .word_idx, .hit_clear, .anneal_start, .round_done,
    .rounds, .samples
  );

  // ---- PRNG: steps every cycle of a run ----
  logic [31:0] rnd_word;
  lfsr32 u_prng (
    .clk, .rst_n, .load(seed_we && !busy), .seed, .step(busy), .q(rnd_word)
  );

  // ---- coefficient memory ----
  logic [ROW*JW-1:0] jrow;
  logic [JW-1:0]     h_i;
  coeff_memory #(.N(N), .ROW_ENTRIES(ROW), .JW(JW)) u_coef (
    .clk,
    .j_we(j_we && !busy), .j_row, .j_col, .j_data,
    .h_we(h_we && !busy), .h_row, .h_data,
    .rd_en, .rd_row(idx), .rd_jrow(jrow), .rd_h(h_i)
  );

  // ---- Bounce-Bind controller ----
  logic signed [B_W:0]  bm;
  bb_controller u_bb (
    .clk, .rst_n, .b_we(start && !busy), .b_in(cfg.bb),
    .m_i(spins[idx]), .b_q(bb), .bm
  );

  // ---- local-field sum ----
  logic signed [SW-1:0]  coup, field;
  logic signed [FBW-1:0] field_bb;
  if (ORDER == 3) begin : g_third
    field_sum3 #(.N(N), .JW(JW), .SW(SW)) u_sum (
      .clk, .en(sum_en), .idx, .jrow, .h(h_i), .m(spins), .bm,
      .coup, .field, .field_bb
    );
  end else begin : g_second
    field_sum2 #(.N(N), .JW(JW), .SW(SW)) u_sum (
      .clk, .en(sum_en), .idx, .jrow, .h(h_i), .m(spins), .bm,
      .coup, .field, .field_bb
    );
  end

  // ---- annealing schedule ----
  annealer u_anneal (
    .clk, .rst_n, .start(anneal_start), .round_done,
    .beta0(cfg_q.beta0), .beta_step(cfg_q.beta_step), .beta_end(cfg_q.beta_end),
    .rounds_per_step(cfg_q.rounds_per_step), .beta, .done(anneal_done)
  );

  // ---- stochastic update ----
  logic                     m_new;
  logic signed [RAND_W:0]   tanh_s;
  spin_update #(.FBW(FBW)) u_upd (
    .field_bb, .beta, .rnd(rnd_word[RAND_W-1:0]), .tanh_s, .m_next(m_new)
  );

  // ---- spin memory ----
  spin_memory #(.N(N)) u_spins (
    .clk, .rst_n,
    .upd_we(upd_en), .upd_idx(idx), .upd_m(m_new),
    .word_we, .word_idx, .word_data(rnd_word),
    .host_we(s_we && !busy), .host_idx(s_idx), .host_m(s_m),
    .m(spins)
  );

  // ---- hitting engine ----
  logic [N-1:0] spins_next;
  always_comb begin
    spins_next      = spins;
    spins_next[idx] = m_new;
  end

  hitting_engine #(.N(N), .JW(JW), .SW(SW), .ORDER(ORDER)) u_hit (
    .clk, .rst_n, .clear(hit_clear),
    .acc_en, .acc_m(spins[idx]), .acc_coup(coup), .acc_h(h_i),
    .init_done, .m_vec(spins),
    .upd_en, .upd_m_old(spins[idx]), .upd_m_new(m_new), .upd_field(field),
    .m_next_vec(spins_next), .sample(samples + 1'b1),
    .target_en(cfg_q.target_en), .target_energy(cfg_q.target_energy),
    .energy, .best_energy, .best_state, .hit_sample, .valid(energy_valid), .hit
  );
endmodule
