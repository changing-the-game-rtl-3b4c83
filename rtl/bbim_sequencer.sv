// bbim_sequencer: run controller of the BBIM.
//
// The paper's machine updates its spins sequentially (one spin at a time,
// each update seeing all earlier ones, i.e. Gibbs sampling) and counts work
// in sampling rounds: one round (sweep) updates all N spins, so a run of R
// rounds draws N*R samples. This block steps through that schedule:
//   PREP        clear the hitting engine, start the annealing schedule;
//   RINIT       optional random initial state: ceil(N/32) PRNG words are
//               written into the spin memory;
//   EREAD/ESUM/EACC  energy pass: for every spin read its coefficient row,
//               form its coupling sum and hand it to the hitting engine;
//   EINIT       the hitting engine loads the initial energy;
//   UREAD       read row i (or stop, see below);
//   USUM        form I_BB,i;
//   UUPD        write m_i(t+1), update the energy; after spin N-1 a round
//               is complete.
// A run stops, in UREAD, when the hitting engine reports the target energy,
// when the annealing schedule is complete, or when max_rounds (if non-zero)
// sweeps are done. The state sequence and its cycle counts are this
// design's choice: the paper gives no N_clks; here one spin update takes
// 3 clock cycles (N_clks = 3) and the energy pass 3N cycles.
//
// Timing: `start` is sampled in IDLE; `busy` is high from the next cycle
// until the run ends, when `done` rises and stays high until the next
// start. `samples` counts spin updates, `rounds` completed sweeps.
module bbim_sequencer
  import bbim_pkg::*;
#(
  parameter int N = 2000
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic                          init_random,
  input  count_t                        max_rounds,
  input  logic                          hit,
  input  logic                          anneal_done,
  output logic                          busy,
  output logic                          done,
  output logic [$clog2(N)-1:0]          idx,
  output logic                          rd_en,
  output logic                          sum_en,
  output logic                          acc_en,
  output logic                          init_done,
  output logic                          upd_en,
  output logic                          word_we,
  output logic [$clog2((N+63)/32)-1:0]  word_idx,
  output logic                          hit_clear,
  output logic                          anneal_start,
  output logic                          round_done,
  output count_t                        rounds,
  output count_t                        samples
);
  typedef enum logic [3:0] {
    S_IDLE, S_PREP, S_RINIT, S_EREAD, S_ESUM, S_EACC, S_EINIT,
    S_UREAD, S_USUM, S_UUPD
  } state_t;

  localparam int NWORDS = (N + 31) / 32;

  state_t state;
  logic   stop;

  assign stop = hit || anneal_done || (max_rounds != '0 && rounds >= max_rounds);

  // Decoded controls
  assign busy         = (state != S_IDLE);
  assign hit_clear    = (state == S_PREP);
  assign anneal_start = (state == S_PREP);
  assign word_we      = (state == S_RINIT);
  assign rd_en        = (state == S_EREAD) || (state == S_UREAD && !stop);
  assign sum_en       = (state == S_ESUM)  || (state == S_USUM);
  assign acc_en       = (state == S_EACC);
  assign init_done    = (state == S_EINIT);
  assign upd_en       = (state == S_UUPD);
  assign round_done   = (state == S_UUPD) && (idx == $clog2(N)'(N - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      done     <= 1'b0;
      idx      <= '0;
      word_idx <= '0;
      rounds   <= '0;
      samples  <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state   <= S_PREP;
          done    <= 1'b0;
          idx     <= '0;
          rounds  <= '0;
          samples <= '0;
        end
        S_PREP: begin
          word_idx <= '0;
          state    <= init_random ? S_RINIT : S_EREAD;
        end
        S_RINIT: begin
          if (int'(word_idx) == NWORDS - 1) state <= S_EREAD;
          word_idx <= word_idx + 1'b1;
        end
        S_EREAD: state <= S_ESUM;
        S_ESUM:  state <= S_EACC;
        S_EACC: begin
          if (idx == $clog2(N)'(N - 1)) begin
            idx   <= '0;
            state <= S_EINIT;
          end else begin
            idx   <= idx + 1'b1;
            state <= S_EREAD;
          end
        end
        S_EINIT: state <= S_UREAD;
        S_UREAD: begin
          if (stop) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= S_USUM;
          end
        end
        S_USUM: state <= S_UUPD;
        S_UUPD: begin
          samples <= samples + 1'b1;
          if (idx == $clog2(N)'(N - 1)) begin
            idx    <= '0;
            rounds <= rounds + 1'b1;
          end else begin
            idx <= idx + 1'b1;
          end
          state <= S_UREAD;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A start while a run is in progress is ignored; flag it in simulation.
  property p_no_start_when_busy;
    @(posedge clk) disable iff (!rst_n) busy |-> !start;
  endproperty
  a_no_start_when_busy: assert property (p_no_start_when_busy)
    else $warning("start asserted while the machine is busy; ignored");
endmodule
