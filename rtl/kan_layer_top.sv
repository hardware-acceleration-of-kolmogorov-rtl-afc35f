// kan_layer_top: one KAN layer on an RRAM compute-in-memory array.
//
// Computes, for every output column j, y_j = sum_m sum_i c'_{m,i,j} *
// B_i(X_m), the spline part of a KAN layer (Eq. 3 without the residual
// branch). Dataflow:
//   1. spline_lookup: each 8-bit input X_m is split into local and global
//      parts; one shared Sharable-Hemi LUT plus per-input TG-MUX/DEMUXs give
//      the 2N-bit values of all G+K basis functions (at most K+1 non-zero).
//   2. The B values are wired to word lines in sparsity-aware order
//      (kan_sam_map): row = rank(i)*M + m, central basis functions nearest
//      the bit-line clamp.
//   3. tmdvig turns each word into a two-level, 2^N+1 unit word-line pulse.
//   4. rram_acim integrates c' * I(V) on each bit line; the sense amplifier
//      returns the column sums in units of one LSB charge.
//
// Interface: the SH-LUT is programmed through lut_*; coefficients through
// w_* with logical addresses (input w_m, basis function w_i, column w_col),
// mapped to physical rows inside. With en high, `start` samples x[] (which
// must be stable in that cycle); `done` pulses 2^N+2 cycles later with y[]
// valid from the next cycle and held until the next operation. `busy` is
// high from the cycle after start until the delay chain has drained. One
// clk period is the unit pulse width of the input generator.
module kan_layer_top #(
  parameter int unsigned M    = kan_pkg::M_IN,
  parameter int unsigned COLS = kan_pkg::COLS,
  parameter int unsigned XW   = kan_pkg::XW,
  parameter int unsigned G    = kan_pkg::G,
  parameter int unsigned K    = kan_pkg::K,
  parameter int unsigned LD   = kan_pkg::LD,
  parameter int unsigned N    = kan_pkg::N,
  parameter int unsigned CW   = kan_pkg::CW,
  parameter int unsigned OUTW = 24,
  parameter real         IR_ALPHA = 0.0
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // SH-LUT programming
  input  logic                             lut_we,
  input  logic [$clog2(((K+1)/2)*(2**LD))-1:0] lut_waddr,
  input  logic [2*N-1:0]                   lut_wdata,
  // coefficient programming (logical address)
  input  logic                             w_we,
  input  logic [$clog2(M)-1:0]             w_m,
  input  logic [$clog2(G+K)-1:0]           w_i,
  input  logic [$clog2(COLS)-1:0]          w_col,
  input  logic signed [CW-1:0]             w_data,
  // inference
  input  logic                             en,
  input  logic                             start,
  input  logic [XW-1:0]                    x [M],
  output logic [M-1:0]                     clipped,
  output logic                             busy,
  output logic                             done,
  output logic signed [OUTW-1:0]           y [COLS]
);
  localparam int unsigned NB   = G + K;
  localparam int unsigned ROWS = M * NB;
  localparam int unsigned BW   = 2 * N;

  logic [BW-1:0]             b_logical  [ROWS];   // index m*NB + i
  logic [BW-1:0]             b_physical [ROWS];   // index = word line
  logic [$clog2(ROWS)-1:0]   w_row;
  real                       wl [ROWS];

  spline_lookup #(.M(M), .XW(XW), .G(G), .K(K), .LD(LD), .BW(BW)) u_lookup (
    .clk, .rst_n, .lut_we, .lut_waddr, .lut_wdata, .x, .b(b_logical), .clipped
  );

  for (genvar m = 0; m < M; m++) begin : g_m
    for (genvar i = 0; i < NB; i++) begin : g_i
      assign b_physical[kan_pkg::sam_row(i, NB) * M + m] = b_logical[m*NB + i];
    end
  end

  kan_sam_map #(.M(M), .NB(NB)) u_map (.m(w_m), .i(w_i), .row(w_row));

  tmdvig #(.ROWS(ROWS), .N(N)) u_ig (
    .clk, .rst_n, .en, .start, .data(b_physical), .wl, .p_n1(), .busy, .done
  );

  rram_acim #(.ROWS(ROWS), .COLS(COLS), .CW(CW), .OUTW(OUTW), .IR_ALPHA(IR_ALPHA)) u_acim (
    .clk, .rst_n, .w_we, .w_row, .w_col, .w_data, .wl,
    .clear(en && start && !busy), .sample(done), .y
  );

endmodule
