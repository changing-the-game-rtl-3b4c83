// coeff_memory_tb: writes a random coefficient matrix and field vector
// one entry per clock, then reads every row and checks the whole row and
// h_i one clock after the read request, and that the output holds while
// rd_en is low. Small sizes (N = 12, 3-bit entries).
module coeff_memory_tb;
  localparam int N = 12, ROW = 12, JW = 3;
  logic clk = 0;
  logic j_we = 0, h_we = 0, rd_en = 0;
  logic [$clog2(N)-1:0] j_row = '0, h_row = '0, rd_row = '0;
  logic [$clog2(ROW)-1:0] j_col = '0;
  logic [JW-1:0] j_data = '0, h_data = '0, rd_h;
  logic [ROW*JW-1:0] rd_jrow;
  logic [JW-1:0] jref [N][ROW];
  logic [JW-1:0] href [N];
  int checks = 0, failures = 0;

  coeff_memory #(.N(N), .ROW_ENTRIES(ROW), .JW(JW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [ROW*JW-1:0] held;
    for (int r = 0; r < N; r++) begin
      for (int c = 0; c < ROW; c++) begin
        @(negedge clk);
        jref[r][c] = JW'($urandom);
        j_we = 1; j_row = r[$clog2(N)-1:0]; j_col = c[$clog2(ROW)-1:0]; j_data = jref[r][c];
      end
      @(negedge clk);
      j_we = 0;
      href[r] = JW'($urandom);
      h_we = 1; h_row = r[$clog2(N)-1:0]; h_data = href[r];
      @(negedge clk);
      h_we = 0;
    end
    for (int r = N - 1; r >= 0; r--) begin
      @(negedge clk);
      rd_en = 1; rd_row = r[$clog2(N)-1:0];
      @(negedge clk);
      rd_en = 0;
      for (int c = 0; c < ROW; c++) begin
        checks++;
        if (rd_jrow[c*JW +: JW] !== jref[r][c]) begin
          failures++;
          $display("FAIL J[%0d][%0d]=%0d expected %0d", r, c, rd_jrow[c*JW +: JW], jref[r][c]);
        end
      end
      checks++;
      if (rd_h !== href[r]) begin failures++; $display("FAIL h[%0d]", r); end
      held = rd_jrow;
      rd_row = '0;
      @(negedge clk);
      checks++;
      if (rd_jrow !== held) begin failures++; $display("FAIL hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
