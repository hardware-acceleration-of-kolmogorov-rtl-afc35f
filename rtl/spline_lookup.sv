// spline_lookup: B(X) lookup for M inputs sharing one SH-LUT.
//
// Every input X_m has its own lg_decoder and l2g_mux_demux; all of them tap
// the same Sharable-Hemi LUT, so the table cost is paid once per layer. The
// result is a word per (input, basis function): b[m*(G+K)+i] = B_i(X_m),
// zero for the basis functions not active at X_m (at most K+1 are).
// Lookup is combinational from x to b; the LUT is written synchronously.
// `clipped` flags inputs saturated to the aligned range.
module spline_lookup #(
  parameter int unsigned M  = kan_pkg::M_IN,
  parameter int unsigned XW = kan_pkg::XW,
  parameter int unsigned G  = kan_pkg::G,
  parameter int unsigned K  = kan_pkg::K,
  parameter int unsigned LD = kan_pkg::LD,
  parameter int unsigned BW = 2 * kan_pkg::N
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          lut_we,
  input  logic [$clog2(((K+1)/2)*(2**LD))-1:0] lut_waddr,
  input  logic [BW-1:0] lut_wdata,
  input  logic [XW-1:0] x [M],
  output logic [BW-1:0] b [M*(G+K)],
  output logic [M-1:0]  clipped
);
  localparam int unsigned DEPTH = ((K+1)/2) * (2**LD);

  logic [BW-1:0] lut_value [DEPTH];

  sh_lut #(.LD(LD), .K(K), .BW(BW)) u_lut (
    .clk, .rst_n, .we(lut_we), .waddr(lut_waddr), .wdata(lut_wdata),
    .value(lut_value)
  );

  for (genvar m = 0; m < M; m++) begin : g_in
    logic [2**LD-1:0] local_sel;
    logic [G-1:0]     global_sel;
    logic [BW-1:0]    b_global [G+K];

    lg_decoder #(.XW(XW), .G(G), .LD(LD)) u_dec (
      .x(x[m]), .local_sel, .global_sel, .clipped(clipped[m])
    );

    l2g_mux_demux #(.LD(LD), .G(G), .K(K), .BW(BW)) u_l2g (
      .lut_value, .local_sel, .global_sel, .b_local(), .b_global
    );

    for (genvar i = 0; i < G + K; i++) begin : g_b
      assign b[m*(G+K)+i] = b_global[i];
    end
  end

endmodule
