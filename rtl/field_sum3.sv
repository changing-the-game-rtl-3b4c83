// field_sum3: local-field sum of the third-order Bounce-Bind spin unit
// (Fig. 3(b): the XOR gates that multiply two spins of a clause, the
// J(3)_ijk multipliers, h_i, B x m_i and the "Sum" block).
//
// For the spin i being updated it forms
//   coup     = sum_{j<k, j,k != i} J(3)_ijk m_j m_k
//   field    = coup + h_i
//   field_bb = field + B m_i
// The coefficient row lists the pairs (j,k), j<k, in the order
// (0,1),(0,2),..,(0,N-1),(1,2),..,(N-2,N-1). As in the paper, the product
// m_j m_k of two spins is one XOR gate: with spin bit 1 = +1, m_j ^ m_k is 1
// exactly when the product is -1, and it selects the sign of J(3)_ijk. Pairs
// containing i itself are left out. Only third-order couplings are kept,
// as the paper does for 3R3X; field_bb carries B's 3 fraction bits.
//
// Timing: registered, computed at a clock edge where `en` is high.
module field_sum3
  import bbim_pkg::*;
#(
  parameter int N  = 56,
  parameter int JW = 2,
  parameter int SW = $clog2((N * (N - 1) / 2) * (1 << (JW - 1)) + (1 << JW)) + 2
) (
  input  logic                              clk,
  input  logic                              en,
  input  logic [$clog2(N)-1:0]              idx,
  input  logic [(N*(N-1)/2)*JW-1:0]         jrow,
  input  logic [JW-1:0]                     h,
  input  logic [N-1:0]                      m,
  input  logic signed [B_W:0]               bm,
  output logic signed [SW-1:0]              coup,
  output logic signed [SW-1:0]              field,
  output logic signed [SW+B_FRAC:0]         field_bb
);
  always_ff @(posedge clk) begin
    if (en) begin
      logic signed [SW-1:0] acc;
      logic signed [JW-1:0] jv;
      int p;
      acc = '0;
      p = 0;
      for (int j = 0; j < N - 1; j++) begin
        for (int k = j + 1; k < N; k++) begin
          jv = jrow[p*JW +: JW];
          if (j != int'(idx) && k != int'(idx)) begin
            if (m[j] ^ m[k]) acc = acc - SW'(jv);
            else             acc = acc + SW'(jv);
          end
          p = p + 1;
        end
      end
      coup     <= acc;
      field    <= acc + SW'($signed(h));
      field_bb <= ((SW+B_FRAC+1)'(acc + SW'($signed(h))) <<< B_FRAC)
                  + (SW+B_FRAC+1)'(bm);
    end
  end
endmodule
