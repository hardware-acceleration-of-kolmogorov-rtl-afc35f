// buffer_array: word-line buffers (behavioural model of an analog driver
// array).
//
// Each buffer is supplied by its row's TG-MUX output and driven by the
// shared W_P(N+1) pulse: while the pulse is high the word line carries the
// supply voltage, otherwise it is held at 0 V. The result on each word line
// is the two-step pulse V[a] for one unit then V[b] for 2^N units.
// Combinational (ideal buffers, no slew).
module buffer_array #(
  parameter int unsigned ROWS = kan_pkg::M_IN * (kan_pkg::G + kan_pkg::K)
) (
  input  real  v_supply [ROWS],
  input  logic p_n1,
  output real  wl [ROWS]
);
  always_comb begin
    for (int r = 0; r < ROWS; r++)
      wl[r] = p_n1 ? v_supply[r] : 0.0;
  end
endmodule
