// nbit_dac: N-bit DAC voltage generator (behavioural model of an analog block).
//
// Produces the 2^N fixed word-line voltages V[0..2^N-1] shared by all
// TG-MUXs. The levels are set so that a single RRAM cell's bit-line current
// is linear in the code, I[x] = x * I_UNIT, through the access transistor's
// Id-Vg curve, here the square law I = KN*(V-VTH)^2 above VTH. Hence
// V[0] = 0 and V[x] = VTH + sqrt(x*I_UNIT/KN). Voltages are in volts,
// currents in microamperes, as `real`. The curve and its constants are
// assumptions of the model; only the linear I-versus-code target is the
// design's. Static: the levels do not depend on time.
module nbit_dac #(
  parameter int unsigned N      = kan_pkg::N,
  parameter real         VTH    = 0.35,
  parameter real         KN     = 40.0,
  parameter real         I_UNIT = 1.0
) (
  output real v_level [2**N]
);
  always_comb begin
    v_level[0] = 0.0;
    for (int x = 1; x < 2**N; x++)
      v_level[x] = VTH + $sqrt(real'(x) * I_UNIT / KN);
  end
endmodule
