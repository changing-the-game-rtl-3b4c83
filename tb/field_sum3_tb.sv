// field_sum3_tb: random third-order rows for N = 7 (21 pairs, 2-bit
// coefficients), h, spins and B; the reference multiplies +-1 spins as
// integers, sum_{j<k, j,k!=i} J_ijk m_j m_k + h_i (+ B m_i), independently of
// the XOR realisation, and checks the registered results.
module field_sum3_tb;
  import bbim_pkg::*;
  localparam int N = 7, JW = 2, P = N * (N - 1) / 2;
  localparam int SW = $clog2(P * (1 << (JW - 1)) + (1 << JW)) + 2;
  logic clk = 0, en = 0;
  logic [$clog2(N)-1:0] idx = '0;
  logic [P*JW-1:0] jrow = '0;
  logic [JW-1:0] h = '0;
  logic [N-1:0] m = '0;
  logic signed [B_W:0] bm = '0;
  logic signed [SW-1:0] coup, field;
  logic signed [SW+B_FRAC:0] field_bb;
  int checks = 0, failures = 0;

  field_sum3 #(.N(N), .JW(JW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int jv, hv, si, c_ref, i, p;
    int s [N];
    real b, f_ref;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      i = $urandom % N;
      idx = $clog2(N)'(i);
      for (int q = 0; q < P; q++) jrow[q*JW +: JW] = JW'($urandom);
      h = JW'($urandom);
      m = N'($urandom);
      for (int j = 0; j < N; j++) s[j] = m[j] ? 1 : -1;
      jv = $urandom % 64; b = (jv - 32) / 8.0;
      si = s[i];
      bm = (B_W+1)'($rtoi(b * si * 8.0));
      c_ref = 0;
      p = 0;
      for (int j = 0; j < N; j++)
        for (int k = j + 1; k < N; k++) begin
          jv = int'($signed(jrow[p*JW +: JW]));
          if (j != i && k != i) c_ref += jv * s[j] * s[k];
          p++;
        end
      hv = int'($signed(h));
      f_ref = real'(c_ref + hv) + b * si;
      en = 1;
      @(negedge clk);
      en = 0;
      checks += 3;
      if (int'(coup) != c_ref) begin failures++; $display("FAIL coup %0d vs %0d", coup, c_ref); end
      if (int'(field) != c_ref + hv) begin failures++; $display("FAIL field"); end
      if (real'(field_bb) / 8.0 != f_ref) begin failures++; $display("FAIL field_bb"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
