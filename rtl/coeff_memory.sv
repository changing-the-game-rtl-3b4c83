// coeff_memory: coefficient memory of the BBIM (Fig. 3, "Coefficient
// memory").
//
// Stores, for every spin i, one row of ROW_ENTRIES coupling coefficients and
// the field h_i. For the second-order machine a row holds J_i1 .. J_iN
// (ROW_ENTRIES = N); for the third-order machine it holds J(3)_ijk for all
// pairs j<k in the order (1,2),(1,3),...,(N-1,N) (ROW_ENTRIES = N(N-1)/2),
// as the figure lists them. Coefficients are JW-bit two's complement
// numbers; the paper uses 2 bits (3 bits for XORSAT gadgets).
//
// Interface and timing (this design's choice; the paper gives no memory
// organisation): the host writes one coefficient per clock through
// (j_we, j_row, j_col, j_data) and one field through (h_we, h_row, h_data).
// A read of row `rd_row` with `rd_en` high returns the whole row on
// `rd_jrow` and h on `rd_h` after the next clock edge, like a registered
// block-RAM port. Writing a row while it is being read is not expected.
module coeff_memory #(
  parameter int N           = 2000,
  parameter int ROW_ENTRIES = 2000,
  parameter int JW          = 2
) (
  input  logic                              clk,
  input  logic                              j_we,
  input  logic [$clog2(N)-1:0]              j_row,
  input  logic [$clog2(ROW_ENTRIES)-1:0]    j_col,
  input  logic [JW-1:0]                     j_data,
  input  logic                              h_we,
  input  logic [$clog2(N)-1:0]              h_row,
  input  logic [JW-1:0]                     h_data,
  input  logic                              rd_en,
  input  logic [$clog2(N)-1:0]              rd_row,
  output logic [ROW_ENTRIES*JW-1:0]         rd_jrow,
  output logic [JW-1:0]                     rd_h
);
  logic [ROW_ENTRIES*JW-1:0] jmem [N];
  logic [JW-1:0]             hmem [N];

  always_ff @(posedge clk) begin
    if (j_we) jmem[j_row][j_col*JW +: JW] <= j_data;
    if (h_we) hmem[h_row] <= h_data;
    if (rd_en) begin
      rd_jrow <= jmem[rd_row];
      rd_h    <= hmem[rd_row];
    end
  end
endmodule
