// l2g_mux_demux: local-to-global MUX/DEMUX of one input X.
//
// Stage 1 (local): K+1 TG-MUXs, each 2^LD-to-1, pick from the shared
// half-LUT the value of the bump at the input's position l = X[LD-1:0].
// Lane j produces B_{j-local}: the value of basis function B_{g+j} at X,
// which lies in segment s = K-j of that function's (K+1)-interval support.
// Full-bump address a = s*2^LD + l; the upper half (a >= stored depth) is
// read from the mirrored entry (K+1)*2^LD-1-a, i.e. with the mux inputs
// wired in reverse order. For K = 3 lanes 3 and 2 read entries directly,
// lanes 1 and 0 through the reversed wiring.
//
// Stage 2 (global): K+1 TG-DEMUXs, each 1-to-G, send lane j to output
// B_{g+j}-global, g = X[XW-1:LD]. Outputs that no lane drives are 0 (word
// line idle). Both stages are AND-OR networks of the one-hot selects from
// lg_decoder, the logic equivalent of transmission-gate trees.
// Purely combinational.
module l2g_mux_demux #(
  parameter int unsigned LD = kan_pkg::LD,
  parameter int unsigned G  = kan_pkg::G,
  parameter int unsigned K  = kan_pkg::K,
  parameter int unsigned BW = 2 * kan_pkg::N
) (
  input  logic [BW-1:0]    lut_value [((K+1)/2)*(2**LD)],
  input  logic [2**LD-1:0] local_sel,
  input  logic [G-1:0]     global_sel,
  output logic [BW-1:0]    b_local  [K+1],   // B_{j-local}(X)
  output logic [BW-1:0]    b_global [G+K]    // B_{i-global}(X), i = 0..G+K-1
);
  localparam int unsigned P     = 2**LD;
  localparam int unsigned DEPTH = ((K+1)/2) * P;

  // Which stored entry feeds input l of lane j's mux (direct or mirrored wire).
  function automatic int unsigned tap(input int unsigned j, input int unsigned l);
    int unsigned a;
    a = (K - j) * P + l;
    return (a < DEPTH) ? a : (K + 1) * P - 1 - a;
  endfunction

  always_comb begin
    for (int j = 0; j <= K; j++) begin
      b_local[j] = '0;
      for (int l = 0; l < P; l++)
        b_local[j] |= lut_value[tap(j, l)] & {BW{local_sel[l]}};
    end
    for (int i = 0; i < G + K; i++) begin
      b_global[i] = '0;
      for (int j = 0; j <= K; j++)
        if (i - j >= 0 && i - j < G)
          b_global[i] |= b_local[j] & {BW{global_sel[i-j]}};
    end
  end

endmodule
