// tmdvig: 2^N:1 time-modulation dynamic-voltage input generator
// (structural; contains behavioural models of its analog parts).
//
// Turns each row's 2N-bit B(X) word {b, a} into one word-line pulse within
// 2^N+1 unit times: V[a] for one unit, then V[b] for 2^N units. With the
// DAC levels chosen so that cell current is linear in the code, the charge
// per row is proportional to a + 2^N*b, i.e. to the word. A pure-PWM
// generator would need 2^(2N) units and a pure-voltage one a 2N-bit DAC;
// here an N-bit DAC and a 2^N+1 unit pulse suffice.
//
// The delay chain, pulse logic and DAC are shared by all rows; each row has
// its own TG-MUX and buffer. Interface and timing are those of pm_tcm:
// start (with en) latches `data`, the word lines pulse in cycles
// 1..2^N+1, done is high in cycle 2^N+2.
module tmdvig #(
  parameter int unsigned ROWS = kan_pkg::M_IN * (kan_pkg::G + kan_pkg::K),
  parameter int unsigned N    = kan_pkg::N
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           en,
  input  logic           start,
  input  logic [2*N-1:0] data [ROWS],
  output real            wl [ROWS],
  output logic           p_n1,
  output logic           busy,
  output logic           done
);
  logic         go, tap1, tapn1, chain_active, p1, pn;
  logic [N-1:0] a [ROWS];
  logic [N-1:0] b [ROWS];
  real          v_level  [2**N];
  real          v_supply [ROWS];

  delay_chain #(.N(N)) u_chain (
    .clk, .rst_n, .go, .tap1, .tapn1, .active(chain_active)
  );

  pm_tcm #(.ROWS(ROWS), .N(N)) u_pm (
    .clk, .rst_n, .en, .start, .data,
    .go, .tap1, .tapn1, .chain_active,
    .a, .b, .p1, .pn, .p_n1, .busy, .done
  );

  nbit_dac #(.N(N)) u_dac (.v_level);

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    tg_mux #(.N(N)) u_tg (
      .v_level, .a(a[r]), .b(b[r]), .p1, .pn, .v_out(v_supply[r])
    );
  end

  buffer_array #(.ROWS(ROWS)) u_buf (.v_supply, .p_n1, .wl);

endmodule
