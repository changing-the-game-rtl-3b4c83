// spin_memory_tb: drives random host writes, 32-spin word writes
// (including the partial last word of N = 70) and spin-unit updates, with
// simultaneous writes to check the priority upd > word > host, and compares
// the spin vector with a reference after every clock.
module spin_memory_tb;
  localparam int N = 70;
  localparam int WI = $clog2((N + 63) / 32);
  logic clk = 0, rst_n = 0;
  logic upd_we = 0, word_we = 0, host_we = 0, upd_m = 0, host_m = 0;
  logic [$clog2(N)-1:0] upd_idx = '0, host_idx = '0;
  logic [WI-1:0] word_idx = '0;
  logic [31:0] word_data = '0;
  logic [N-1:0] m, ref_m;
  int checks = 0, failures = 0;

  spin_memory #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_m = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (m !== '0) begin failures++; $display("FAIL reset"); end
    for (int k = 0; k < 3000; k++) begin
      upd_we   = ($urandom % 4) == 0;
      word_we  = ($urandom % 4) == 0;
      host_we  = ($urandom % 2) == 0;
      upd_idx  = $clog2(N)'($urandom % N);
      host_idx = $clog2(N)'($urandom % N);
      word_idx = WI'($urandom % 3);
      word_data = $urandom;
      upd_m  = $urandom;
      host_m = $urandom;
      if (upd_we) ref_m[upd_idx] = upd_m;
      else if (word_we) begin
        for (int b = 0; b < 32; b++)
          if (word_idx * 32 + b < N) ref_m[word_idx * 32 + b] = word_data[b];
      end else if (host_we) ref_m[host_idx] = host_m;
      @(negedge clk);
      checks++;
      if (m !== ref_m) begin
        failures++;
        if (failures < 5) $display("FAIL k=%0d m=%h ref=%h", k, m, ref_m);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
