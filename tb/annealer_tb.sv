// annealer_tb: runs the paper's schedule (beta 0.125 to 4.0 in steps of
// 0.125) with 3 sweeps per step and checks beta before every sweep and
// that `done` rises exactly after the 32*3 = 96th sweep; then an
// overshooting step (0.5, 1.25, then 2.0 clamped), a fixed-temperature run
// (beta = 1, step 0) and a restart.
module annealer_tb;
  import bbim_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, round_done = 0;
  beta_t beta0 = '0, beta_step = '0, beta_end = '0, beta;
  count_t rounds_per_step = '0;
  logic done;
  int checks = 0, failures = 0;

  annealer dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(real b0, real bs, real be, int rps, int sweeps_expected);
    real expb;
    int sweeps;
    beta0 = BETA_W'($rtoi(b0 * 8)); beta_step = BETA_W'($rtoi(bs * 8));
    beta_end = BETA_W'($rtoi(be * 8)); rounds_per_step = rps;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    sweeps = 0;
    expb = b0;
    while (!done && sweeps < 1000) begin
      checks++;
      if (real'(beta) / 8.0 != expb) begin
        failures++;
        $display("FAIL sweep %0d beta %f expected %f", sweeps, real'(beta) / 8.0, expb);
      end
      round_done = 1;
      @(negedge clk);
      round_done = 0;
      @(negedge clk);
      sweeps++;
      if (sweeps % rps == 0 && expb < be) begin
        expb = expb + bs;
        if (expb > be) expb = be;
      end
    end
    checks++;
    if (sweeps != sweeps_expected) begin
      failures++;
      $display("FAIL done after %0d sweeps, expected %0d", sweeps, sweeps_expected);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(0.125, 0.125, 4.0, 3, 96);
    run(0.5, 0.75, 2.0, 2, 6);
    run(1.0, 0.0, 1.0, 5, 5);
    run(0.125, 0.125, 4.0, 1, 32);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
