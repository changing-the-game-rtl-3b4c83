// field_sum2: local-field sum of the second-order Bounce-Bind spin unit
// (Fig. 3(a): the J_ij x m_j multipliers, the h_i input, the B x m_i
// multiplier and the "Sum" block).
//
// For the spin i being updated it forms
//   coup     = sum_{j != i} J_ij m_j
//   field    = coup + h_i                          (I_i of the paper)
//   field_bb = field + B m_i                       (I_BB,i of the paper)
// Each J_ij m_j is a sign selection of J_ij by the spin bit, so the
// "multipliers" are conditional negations; the diagonal term j = i is left
// out whatever the memory holds. All products are summed in one step, as the
// figure draws one multiplier per coefficient feeding one Sum block.
// field_bb carries the 3 fraction bits of B (field is shifted left by 3).
//
// Timing: the sums are registered; they are computed from the inputs present
// at a clock edge where `en` is high and appear after that edge.
module field_sum2
  import bbim_pkg::*;
#(
  parameter int N  = 2000,
  parameter int JW = 2,
  parameter int SW = $clog2(N * (1 << (JW - 1)) + (1 << JW)) + 2
) (
  input  logic                         clk,
  input  logic                         en,
  input  logic [$clog2(N)-1:0]         idx,
  input  logic [N*JW-1:0]              jrow,
  input  logic [JW-1:0]                h,
  input  logic [N-1:0]                 m,
  input  logic signed [B_W:0]          bm,
  output logic signed [SW-1:0]         coup,
  output logic signed [SW-1:0]         field,
  output logic signed [SW+B_FRAC:0]    field_bb
);
  always_ff @(posedge clk) begin
    if (en) begin
      logic signed [SW-1:0] acc;
      logic signed [JW-1:0] jv;
      acc = '0;
      for (int j = 0; j < N; j++) begin
        jv = jrow[j*JW +: JW];
        if (j != int'(idx)) begin
          if (m[j]) acc = acc + SW'(jv);
          else      acc = acc - SW'(jv);
        end
      end
      coup     <= acc;
      field    <= acc + SW'($signed(h));
      field_bb <= ((SW+B_FRAC+1)'(acc + SW'($signed(h))) <<< B_FRAC)
                  + (SW+B_FRAC+1)'(bm);
    end
  end
endmodule
