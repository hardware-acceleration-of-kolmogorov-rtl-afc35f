// rram_acim: RRAM analog compute-in-memory array with bit-line readout
// (behavioural model of an analog macro).
//
// ROWS x COLS cells each hold a signed CW-bit coefficient c' as a
// conductance (signed values stand for a differential cell pair). Every
// unit time (one clk period) each cell on a driven word line sources a
// bit-line current c' * f(V_WL), f being the access transistor's Id-Vg
// curve I = KN*(V-VTH)^2 above VTH; the clamp holds the bit line, a current
// mirror copies the summed current onto a capacitor, and the charge Q
// accumulates. `clear` empties the capacitors; `sample` makes the sense
// amplifier convert Q into a signed count of unit charges
// (W_P1 * I_UNIT), available on y from the next cycle. The SA is modelled
// as an ideal rounding converter of OUTW bits.
//
// IR drop: row r sits r rows away from the clamp (row 0 nearest). A cell's
// contribution is scaled by (1 - IR_ALPHA * r); IR_ALPHA = 0 gives an ideal
// array. Coefficients are written one at a time through w_we and are not
// cleared by reset (non-volatile). Model constants are assumptions.
module rram_acim #(
  parameter int unsigned ROWS     = kan_pkg::M_IN * (kan_pkg::G + kan_pkg::K),
  parameter int unsigned COLS     = kan_pkg::COLS,
  parameter int unsigned CW       = kan_pkg::CW,
  parameter int unsigned OUTW     = 24,
  parameter real         VTH      = 0.35,
  parameter real         KN       = 40.0,
  parameter real         I_UNIT   = 1.0,
  parameter real         IR_ALPHA = 0.0
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    w_we,
  input  logic [$clog2(ROWS)-1:0] w_row,
  input  logic [$clog2(COLS)-1:0] w_col,
  input  logic signed [CW-1:0]    w_data,
  input  real                     wl [ROWS],
  input  logic                    clear,
  input  logic                    sample,
  output logic signed [OUTW-1:0]  y [COLS]
);
  logic signed [CW-1:0] coef [ROWS][COLS];
  real                  q [COLS];

  function automatic real f_idvg(input real v);
    return (v > VTH) ? KN * (v - VTH) * (v - VTH) : 0.0;
  endfunction

  always_ff @(posedge clk) begin
    if (w_we) coef[w_row][w_col] <= w_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < COLS; c++) begin
        q[c] <= 0.0;
        y[c] <= '0;
      end
    end else begin
      for (int c = 0; c < COLS; c++) begin
        real acc;
        acc = clear ? 0.0 : q[c];
        for (int r = 0; r < ROWS; r++)
          acc += real'(coef[r][c]) * f_idvg(wl[r]) * (1.0 - IR_ALPHA * real'(r));
        q[c] <= acc;
        if (sample) y[c] <= OUTW'($rtoi(q[c] / I_UNIT + ((q[c] < 0.0) ? -0.5 : 0.5)));
      end
    end
  end

endmodule
