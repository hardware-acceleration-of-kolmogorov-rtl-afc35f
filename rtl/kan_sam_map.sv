// kan_sam_map: sparsity-aware row address map.
//
// Only K+1 of the G+K basis functions of an input are active at once, and
// for inputs concentrated mid-range the central ones are active most often.
// IR drop on a bit line grows with distance from the clamp, so the
// coefficients of the most frequently active basis functions are placed on
// the rows nearest the clamp. This block turns a logical coefficient
// address (input m, basis function i) into the physical row
//   row = rank(i) * M + m,
// where rank (kan_pkg::sam_row) orders the basis functions from the centre
// outwards (for G+K = 8: B3, B4, B2, B5, B1, B6, B0, B7). All inputs' rank-0
// rows come first, nearest the clamp. The same order wires the B(X) outputs
// to the word lines in kan_layer_top. The centre-out order assumes inputs
// peaked mid-range (the Gaussian case); it is fixed here, not programmable.
// Combinational.
module kan_sam_map #(
  parameter int unsigned M  = kan_pkg::M_IN,
  parameter int unsigned NB = kan_pkg::G + kan_pkg::K
) (
  input  logic [$clog2(M)-1:0]    m,
  input  logic [$clog2(NB)-1:0]   i,
  output logic [$clog2(M*NB)-1:0] row
);
  always_comb row = ($clog2(M*NB))'(kan_pkg::sam_row(int'(i), NB) * M + int'(m));
endmodule
