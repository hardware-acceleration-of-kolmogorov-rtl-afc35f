// tg_mux: transmission-gate MUX of one word line (behavioural model of an
// analog switch network).
//
// Connects one of the 2^N DAC levels to the supply of this word line's
// buffer: V[a] while the W_P1 pulse is high, V[b] while W_PN is high, and
// 0 V otherwise. a and b are the low and high halves of the row's B(X)
// word, latched by the pulse modulation logic. Combinational.
module tg_mux #(
  parameter int unsigned N = kan_pkg::N
) (
  input  real          v_level [2**N],
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  input  logic         p1,
  input  logic         pn,
  output real          v_out
);
  always_comb begin
    if (p1)      v_out = v_level[a];
    else if (pn) v_out = v_level[b];
    else         v_out = 0.0;
  end
endmodule
