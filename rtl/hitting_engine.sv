// hitting_engine: Ising-energy tracker and "hitting time" recorder of the
// BBIM.
//
// The paper adds a hitting engine that reports, for each run, the lowest
// Ising energy reached (B's constant term excluded) and when it was first
// reached, and stops a run early once a known ground-state energy is hit.
// This block does that as follows (the method is this design's own):
//   * energy pass: before sampling, the sequencer streams every spin with
//     its coupling sum c_i and field h_i. The engine accumulates
//     A = sum_i m_i c_i and H = sum_i m_i h_i. Each coupling term appears
//     ORDER times in A, so E = -A/ORDER - H. `init_done` loads E and makes
//     the initial state the best one.
//   * sampling: E is a linear function of each single spin, so when spin i
//     flips from m_old the energy changes by 2 m_old I_i, I_i being the
//     classical local field (without B). After every update whose new
//     energy is lower than the best so far, the energy, the whole spin
//     vector after the update and the sample number are stored.
//   * `hit` is high while target checking is on and E <= target_energy.
//
// Timing: all results are registered; an update presented with `upd_en`
// is reflected in `energy`, `best_*` and `hit` after that clock edge.
module hitting_engine
  import bbim_pkg::*;
#(
  parameter int N     = 2000,
  parameter int JW    = 2,
  parameter int SW    = 16,
  parameter int ORDER = 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  logic                  acc_en,
  input  logic                  acc_m,
  input  logic signed [SW-1:0]  acc_coup,
  input  logic [JW-1:0]         acc_h,
  input  logic                  init_done,
  input  logic [N-1:0]          m_vec,
  input  logic                  upd_en,
  input  logic                  upd_m_old,
  input  logic                  upd_m_new,
  input  logic signed [SW-1:0]  upd_field,
  input  logic [N-1:0]          m_next_vec,
  input  count_t                sample,
  input  logic                  target_en,
  input  energy_t               target_energy,
  output energy_t               energy,
  output energy_t               best_energy,
  output logic [N-1:0]          best_state,
  output count_t                hit_sample,
  output logic                  valid,
  output logic                  hit
);
  energy_t acc_a, acc_hs;
  energy_t e_next;

  always_comb begin
    e_next = energy;
    if (upd_m_old != upd_m_new) begin
      if (upd_m_old) e_next = energy + (E_W'(upd_field) <<< 1);
      else           e_next = energy - (E_W'(upd_field) <<< 1);
    end
  end

  assign hit = valid && target_en && (energy <= target_energy);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_a       <= '0;
      acc_hs      <= '0;
      energy      <= '0;
      best_energy <= '0;
      best_state  <= '0;
      hit_sample  <= '0;
      valid       <= 1'b0;
    end else if (clear) begin
      acc_a  <= '0;
      acc_hs <= '0;
      valid  <= 1'b0;
    end else if (acc_en) begin
      acc_a  <= acc_m ? acc_a + E_W'(acc_coup) : acc_a - E_W'(acc_coup);
      acc_hs <= acc_m ? acc_hs + E_W'($signed(acc_h)) : acc_hs - E_W'($signed(acc_h));
    end else if (init_done) begin
      energy      <= -(acc_a / ORDER) - acc_hs;
      best_energy <= -(acc_a / ORDER) - acc_hs;
      best_state  <= m_vec;
      hit_sample  <= '0;
      valid       <= 1'b1;
    end else if (upd_en) begin
      energy <= e_next;
      if (e_next < best_energy) begin
        best_energy <= e_next;
        best_state  <= m_next_vec;
        hit_sample  <= sample;
      end
    end
  end
endmodule
