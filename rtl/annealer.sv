// annealer: linear inverse-temperature schedule (Fig. 3 "Annealing", beta
// input).
//
// The paper anneals linearly from beta0 = 0.125 in increments of 0.125 and
// stops the search at beta = 4. Here beta starts at cfg beta0 on `start`,
// and after every `rounds_per_step` completed sweeps (`round_done` pulses)
// it rises by beta_step, never beyond beta_end. `done` goes high once the
// sweeps at beta_end are complete, which is where the search stops. A zero
// beta_step with beta0 = beta_end gives a fixed temperature for
// rounds_per_step sweeps (the paper's un-annealed runs at beta = 1). How many
// sweeps are spent at each beta is not given by the paper and is a run
// setting here; a rounds_per_step of 0 is treated as 1.
//
// Timing: registered; `beta` changes at the clock edge of the round_done
// pulse that completes a step, so the next sweep uses the new value.
module annealer
  import bbim_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  logic   round_done,
  input  beta_t  beta0,
  input  beta_t  beta_step,
  input  beta_t  beta_end,
  input  count_t rounds_per_step,
  output beta_t  beta,
  output logic   done
);
  count_t cnt;
  count_t rps_m1;
  logic [BETA_W:0] next_beta;

  assign rps_m1    = (rounds_per_step == '0) ? '0 : rounds_per_step - 1'b1;
  assign next_beta = {1'b0, beta} + {1'b0, beta_step};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beta <= '0;
      cnt  <= '0;
      done <= 1'b0;
    end else if (start) begin
      beta <= beta0;
      cnt  <= '0;
      done <= 1'b0;
    end else if (round_done && !done) begin
      if (cnt == rps_m1) begin
        cnt <= '0;
        if (beta >= beta_end)                    done <= 1'b1;
        else if (next_beta >= {1'b0, beta_end})  beta <= beta_end;
        else                                     beta <= next_beta[BETA_W-1:0];
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
